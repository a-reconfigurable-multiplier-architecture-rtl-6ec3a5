// tb_mul_unit - checks the multiplier unit: the four RV32M multiplies in exact
// mode against SystemVerilog arithmetic, approximate mode under several
// mulcsr values against the reference model (magnitudes multiplied, sign
// applied after), the exact fallback when the enable bit is 0 whatever the
// Er fields hold, the reserved circuit-select codes, and the latency.
module tb_mul_unit;
  import rmul_pkg::*;
  import rmul_ref_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0;
  logic [2:0]  funct3 = '0;
  logic [31:0] rs1 = '0, rs2 = '0, mulcsr = '0, result;
  logic        busy, done;
  int checks = 0, failures = 0;

  mul_unit dut (.clk, .rst_n, .start, .funct3, .rs1, .rs2, .mulcsr, .busy, .done, .result);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expect_result(logic [2:0] f3, logic [31:0] x, y, logic [31:0] csr);
    logic s1, s2;
    logic [31:0] m1, m2;
    logic [63:0] pu, ps;
    logic [7:0] el, em, eh;
    if (csr[2:1] != 2'b00) return 32'h0;
    s1 = (f3 == 3'b001 || f3 == 3'b010) && x[31];
    s2 = (f3 == 3'b001) && y[31];
    m1 = s1 ? -x : x;
    m2 = s2 ? -y : y;
    el = csr[0] ? csr[10:3]  : 8'hFF;
    em = csr[0] ? csr[18:11] : 8'hFF;
    eh = csr[0] ? csr[26:19] : 8'hFF;
    pu = ref_mul32(1'b1, m1, m2, el, em, eh);
    ps = (s1 ^ s2) ? -pu : pu;
    return (f3 == 3'b000) ? ps[31:0] : ps[63:32];
  endfunction

  function automatic logic [31:0] exact_result(logic [2:0] f3, logic [31:0] x, y);
    logic signed [63:0] p;
    unique case (f3)
      3'b000: p = $signed({{32{x[31]}}, x}) * $signed({{32{y[31]}}, y});
      3'b001: p = $signed({{32{x[31]}}, x}) * $signed({{32{y[31]}}, y});
      3'b010: p = $signed({{32{x[31]}}, x}) * $signed({32'b0, y});
      default: p = $signed({32'b0, x}) * $signed({32'b0, y});
    endcase
    return (f3 == 3'b000) ? p[31:0] : p[63:32];
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (f3=%0d rs1=%h rs2=%h csr=%h result=%h)", what, funct3, rs1, rs2, mulcsr, result);
    end
  endtask

  task automatic run(logic [2:0] f3, logic [31:0] x, y, csr);
    int lat;
    @(negedge clk);
    funct3 = f3; rs1 = x; rs2 = y; mulcsr = csr; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    mulcsr = $urandom;                 // a later CSR change must not disturb the operation
    while (!done && lat < 20) begin
      @(negedge clk);
      lat++;
    end
    mulcsr = csr;
    check("latency", lat == 5);
    check("result", result === expect_result(f3, x, y, csr));
    if (csr[0] == 1'b0 && csr[2:1] == 2'b00) check("exact result", result === exact_result(f3, x, y));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      run(3'(f), 32'h8000_0000, 32'h8000_0000, 32'h0);
      run(3'(f), 32'hFFFF_FFFF, 32'h0000_0007, 32'h0);
      run(3'(f), 32'h7FFF_FFFF, 32'hFFFF_FFFF, 32'h0);
      run(3'(f), 32'd5, 32'd24, 32'h07FF_8001);
    end
    // enable bit 0 with non-exact Er fields: still exact
    for (int i = 0; i < 100; i++) run(3'($urandom_range(0, 3)), $urandom, $urandom, {$urandom} & ~32'h7);
    for (int i = 0; i < 200; i++) run(3'($urandom_range(0, 3)), $urandom, $urandom, 32'h0);
    for (int i = 0; i < 200; i++) run(3'($urandom_range(0, 3)), $urandom, $urandom, 32'h0000_0001);
    for (int i = 0; i < 200; i++) run(3'($urandom_range(0, 3)), $urandom, $urandom, ($urandom & ~32'h6) | 32'h1);
    // reserved circuits return zero
    for (int i = 0; i < 20; i++) run(3'($urandom_range(0, 3)), $urandom, $urandom, {$urandom} | 32'h2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
