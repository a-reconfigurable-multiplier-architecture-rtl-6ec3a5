// tb_ex_mul_top - end-to-end test of the multiply path at its default
// parameters (SSM compressors).
//
// Plays the sample program that computes a factorial with mulcsr set to
// 0x07FF8001 (approximate, low field at maximum approximation, cross fields
// 0xF0, high field exact), then resets mulcsr with csrrw x0 and repeats it
// exactly. Then exercises every mechanism of the design and counts each:
// CSR write / set / clear, exact and approximate multiplies, the stall
// (busy) while a multiply runs, a start ignored while busy, all four RV32M
// multiplies, a reserved circuit select and the mode switches. Each count
// must be non-zero. Results are checked against the reference model.
module tb_ex_mul_top;
  import rmul_pkg::*;
  import rmul_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        csr_en = 0, csr_hit;
  csr_op_e     csr_op = CSR_NONE;
  logic [11:0] csr_addr = '0;
  logic [31:0] csr_wdata = '0, csr_rdata;
  logic        mul_start = 0, mul_busy, mul_done;
  logic [2:0]  mul_funct3 = '0;
  logic [31:0] rs1 = '0, rs2 = '0, mul_result, alucsr, mulcsr, divcsr;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_csr_write, n_csr_set, n_csr_clear, n_exact, n_approx, n_stall_cycles,
      n_ignored_start, n_reserved, n_switch;
  int n_f3 [4];
  logic last_mode_approx;

  ex_mul_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic csr(csr_op_e op, logic [11:0] addr, logic [31:0] val, output logic [31:0] old);
    @(negedge clk);
    csr_en = 1; csr_op = op; csr_addr = addr; csr_wdata = val;
    #1 old = csr_rdata;
    @(negedge clk);
    csr_en = 0; csr_op = CSR_NONE;
    if (op == CSR_WRITE) n_csr_write++;
    if (op == CSR_SET)   n_csr_set++;
    if (op == CSR_CLEAR) n_csr_clear++;
  endtask

  function automatic logic [31:0] model(logic [2:0] f3, logic [31:0] x, y, logic [31:0] c);
    logic s1, s2;
    logic [63:0] pu, ps;
    if (c[2:1] != 2'b00) return '0;
    s1 = (f3 == 3'b001 || f3 == 3'b010) && x[31];
    s2 = (f3 == 3'b001) && y[31];
    pu = ref_mul32(1'b1, s1 ? -x : x, s2 ? -y : y,
                   c[0] ? c[10:3] : 8'hFF, c[0] ? c[18:11] : 8'hFF, c[0] ? c[26:19] : 8'hFF);
    ps = (s1 ^ s2) ? -pu : pu;
    return (f3 == 3'b000) ? ps[31:0] : ps[63:32];
  endfunction

  task automatic mul(logic [2:0] f3, logic [31:0] x, y, output logic [31:0] r, input bit poke = 0);
    int lat;
    logic [31:0] c;
    c = mulcsr;
    @(negedge clk);
    mul_funct3 = f3; rs1 = x; rs2 = y; mul_start = 1;
    @(negedge clk);
    mul_start = 0;
    lat = 1;
    if (poke) begin                          // issue again while busy: ignored
      check("busy before poke", mul_busy);
      rs1 = ~x; mul_start = 1;
      @(negedge clk);
      mul_start = 0;
      lat++;
      n_ignored_start++;
    end
    while (!mul_done && lat < 20) begin
      if (mul_busy) n_stall_cycles++;
      @(negedge clk);
      lat++;
    end
    r = mul_result;
    check("latency 5", lat == 5);
    check($sformatf("result f3=%0d %h*%h csr=%h: %h vs %h", f3, x, y, c, r, model(f3, x, y, c)),
          r === model(f3, x, y, c));
    n_f3[f3[1:0]]++;
    if (c[2:1] != 2'b00) n_reserved++;
    else if (c[0]) n_approx++;
    else n_exact++;
    if (c[2:1] == 2'b00) begin
      if (last_mode_approx !== c[0]) n_switch++;
      last_mode_approx = c[0];
    end
  endtask

  // the sample factorial program: x10 = 5, x11 = x12 = 1, loop x11 *= x12
  task automatic factorial(output logic [31:0] x11);
    logic [31:0] x12, r;
    x11 = 1;
    x12 = 1;
    do begin
      mul(F3_MUL, x11, x12, r);
      x11 = r;
      x12 = x12 + 1;
    end while ($signed(x12) < 5);
  endtask

  initial begin
    logic [31:0] old, r, fa, fe;
    n_csr_write = 0; n_csr_set = 0; n_csr_clear = 0; n_exact = 0; n_approx = 0;
    n_stall_cycles = 0; n_ignored_start = 0; n_reserved = 0; n_switch = 0;
    n_f3 = '{default: 0};
    last_mode_approx = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- sample program ----
    csr(CSR_WRITE, MULCSR_ADDR, 32'h07FF_8001, old);
    check("csrrw returns old value 0", old == 0);
    check("mulcsr written", mulcsr == 32'h07FF_8001);
    factorial(fa);
    csr(CSR_WRITE, MULCSR_ADDR, 32'h0, old);
    check("csrrw returns 0x07FF8001", old == 32'h07FF_8001);
    factorial(fe);
    check("exact factorial loop gives 24", fe == 24);
    $display("factorial loop: approximate %0d, exact %0d", fa, fe);

    // ---- larger operands, approximate everywhere, then exact ----
    csr(CSR_SET, MULCSR_ADDR, 32'h1, old);                  // enable, Er all 0
    for (int i = 0; i < 50; i++) mul(3'($urandom_range(0, 3)), $urandom, $urandom, r);
    csr(CSR_SET, MULCSR_ADDR, 32'h0780_0000, old);          // part of the high field exact
    for (int i = 0; i < 20; i++) mul(F3_MULHU, $urandom, $urandom, r);
    csr(CSR_CLEAR, MULCSR_ADDR, 32'h1, old);                 // back to exact
    for (int i = 0; i < 50; i++) mul(3'($urandom_range(0, 3)), $urandom, $urandom, r, i % 10 == 0);
    mul(F3_MULH, 32'h8000_0000, 32'h8000_0000, r);
    check("MULH of two -2^31", r == 32'h4000_0000);
    mul(F3_MULHSU, 32'hFFFF_FFFF, 32'hFFFF_FFFF, r);
    check("MULHSU -1 * (2^32-1)", r == 32'hFFFF_FFFF);

    // ---- reserved circuit select ----
    csr(CSR_WRITE, MULCSR_ADDR, 32'h0000_0004, old);
    mul(F3_MUL, 32'd7, 32'd6, r);
    check("reserved circuit gives 0", r == 0);
    csr(CSR_WRITE, MULCSR_ADDR, 32'h0, old);
    mul(F3_MUL, 32'd7, 32'd6, r, 1);
    check("7*6", r == 42);

    // ---- ALU and divider CSRs are passed out untouched by multiplies ----
    csr(CSR_WRITE, ALUCSR_ADDR, 32'h0000_0001, old);
    csr(CSR_WRITE, DIVCSR_ADDR, 32'h0000_0003, old);
    check("alucsr/divcsr out", alucsr == 1 && divcsr == 3 && mulcsr == 0);

    $display("mechanisms: csr write %0d, set %0d, clear %0d, exact muls %0d, approx muls %0d,",
             n_csr_write, n_csr_set, n_csr_clear, n_exact, n_approx);
    $display("            stall cycles %0d, ignored starts %0d, reserved %0d, mode switches %0d,",
             n_stall_cycles, n_ignored_start, n_reserved, n_switch);
    $display("            MUL %0d MULH %0d MULHSU %0d MULHU %0d", n_f3[0], n_f3[1], n_f3[2], n_f3[3]);
    check("csr write seen", n_csr_write > 0);
    check("csr set seen", n_csr_set > 0);
    check("csr clear seen", n_csr_clear > 0);
    check("exact multiply seen", n_exact > 0);
    check("approximate multiply seen", n_approx > 0);
    check("stall seen", n_stall_cycles > 0);
    check("ignored start seen", n_ignored_start > 0);
    check("reserved circuit seen", n_reserved > 0);
    check("mode switch seen", n_switch >= 2);
    foreach (n_f3[i]) check("each funct3 seen", n_f3[i] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
