// tb_workloads - runs the multiply streams of the evaluated kernels through
// the multiply path at its default parameters, once with mulcsr = 0x0
// (exact) and once with mulcsr = 0x1 (approximate, every Er field 0).
//
// Kernels: matrix multiply N x N (N = 3, 6), 2-D convolution of an N x N
// image with a 3 x 3 kernel and zero padding (N = 3, 6), the factorial
// loop of the sample program, an 8-tap FIR over 16 samples and a first-order
// IIR over 16 samples. Data are non-negative 8-bit values (the multiplier is
// unsigned), generated with $urandom. The loads, stores and additions a core
// would do are done here in SystemVerilog; only the multiplies go through
// the design. Exact runs must match integer arithmetic exactly; every
// multiply of an approximate run must match the reference model; the mean
// relative error of the approximate outputs is reported, not judged.
module tb_workloads;
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
  int n_mul, n_cycles;

  ex_mul_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic set_mulcsr(logic [31:0] v);
    @(negedge clk);
    csr_en = 1; csr_op = CSR_WRITE; csr_addr = MULCSR_ADDR; csr_wdata = v;
    @(negedge clk);
    csr_en = 0; csr_op = CSR_NONE;
  endtask

  // one MUL instruction through the design, checked against the model
  task automatic mul(logic [31:0] x, y, output logic [31:0] r);
    logic [31:0] exp_r;
    @(negedge clk);
    mul_funct3 = F3_MUL; rs1 = x; rs2 = y; mul_start = 1;
    @(negedge clk);
    mul_start = 0;
    n_cycles++;
    while (!mul_done) begin
      @(negedge clk);
      n_cycles++;
    end
    r = mul_result;
    exp_r = mulcsr[0] ? ref_mul32(1'b1, x, y, mulcsr[10:3], mulcsr[18:11], mulcsr[26:19])
                      : x * y;
    n_mul++;
    checks++;
    if (r !== exp_r) begin
      failures++;
      $display("FAIL mul %0d*%0d csr=%h: %0d, expected %0d", x, y, mulcsr, r, exp_r);
    end
  endtask

  // outputs of the current kernel: exact reference and design result
  longint ref_out [64];
  longint got_out [64];
  int     n_out;

  task automatic report(string name, bit approx);
    real mred;
    int  nerr;
    mred = 0.0;
    nerr = 0;
    for (int i = 0; i < n_out; i++) begin
      if (got_out[i] != ref_out[i]) nerr++;
      if (ref_out[i] != 0)
        mred += ((got_out[i] > ref_out[i]) ? real'(got_out[i] - ref_out[i])
                                           : real'(ref_out[i] - got_out[i])) / real'(ref_out[i]);
    end
    if (!approx) begin
      checks++;
      if (nerr != 0) begin
        failures++;
        $display("FAIL %s exact run: %0d wrong outputs", name, nerr);
      end
    end
    $display("%-12s %-6s muls %4d  cycles in multiplier %5d  wrong outputs %2d/%2d  MRED %6.3f%%",
             name, approx ? "approx" : "exact", n_mul, n_cycles, nerr, n_out,
             100.0 * mred / real'(n_out));
  endtask

  logic [31:0] A [6][6], B [6][6], K [3][3], X [16], H [8];

  task automatic matmul(int n, bit approx);
    logic [31:0] r;
    n_mul = 0; n_cycles = 0; n_out = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        longint acc, eacc;
        acc = 0; eacc = 0;
        for (int k = 0; k < n; k++) begin
          mul(A[i][k], B[k][j], r);
          acc += r;
          eacc += longint'(A[i][k]) * longint'(B[k][j]);
        end
        got_out[n_out] = acc; ref_out[n_out] = eacc; n_out++;
      end
    report($sformatf("matMul%0dx%0d", n, n), approx);
  endtask

  task automatic conv2d(int n, bit approx);
    logic [31:0] r;
    n_mul = 0; n_cycles = 0; n_out = 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        longint acc, eacc;
        acc = 0; eacc = 0;
        for (int u = 0; u < 3; u++)
          for (int v = 0; v < 3; v++) begin
            int y, x;
            y = i + u - 1; x = j + v - 1;
            if (y >= 0 && y < n && x >= 0 && x < n) begin
              mul(A[y][x], K[u][v], r);
              acc += r;
              eacc += longint'(A[y][x]) * longint'(K[u][v]);
            end
          end
        got_out[n_out] = acc; ref_out[n_out] = eacc; n_out++;
      end
    report($sformatf("2dConv%0dx%0d", n, n), approx);
  endtask

  task automatic factorial(bit approx);
    logic [31:0] x11, x12, r;
    longint e;
    n_mul = 0; n_cycles = 0; n_out = 0;
    x11 = 1; x12 = 1; e = 1;
    while (x12 < 5) begin
      mul(x11, x12, r);
      x11 = r; e = e * x12;
      x12++;
    end
    got_out[0] = x11; ref_out[0] = e; n_out = 1;
    report("factorial", approx);
  endtask

  task automatic fir(bit approx);
    logic [31:0] r;
    n_mul = 0; n_cycles = 0; n_out = 0;
    for (int t = 0; t < 16; t++) begin
      longint acc, eacc;
      acc = 0; eacc = 0;
      for (int k = 0; k < 8; k++)
        if (t - k >= 0) begin
          mul(X[t-k], H[k], r);
          acc += r;
          eacc += longint'(X[t-k]) * longint'(H[k]);
        end
      got_out[n_out] = acc; ref_out[n_out] = eacc; n_out++;
    end
    report("fir_int", approx);
  endtask

  // y[t] = (b0*x[t] + a1*y[t-1]) >> 8, with b0 = H[0], a1 = H[1] (both < 256)
  task automatic iir(bit approx);
    logic [31:0] r1, r2, y, ey;
    n_mul = 0; n_cycles = 0; n_out = 0;
    y = 0; ey = 0;
    for (int t = 0; t < 16; t++) begin
      mul(H[0], X[t], r1);
      mul(H[1], y, r2);
      y  = (r1 + r2) >> 8;
      ey = (H[0] * X[t] + H[1] * ey) >> 8;
      got_out[n_out] = y; ref_out[n_out] = ey; n_out++;
    end
    report("iir_int", approx);
  endtask

  initial begin
    for (int i = 0; i < 6; i++)
      for (int j = 0; j < 6; j++) begin
        A[i][j] = 32'($urandom_range(0, 255));
        B[i][j] = 32'($urandom_range(0, 255));
      end
    foreach (K[i, j]) K[i][j] = 32'($urandom_range(0, 255));
    foreach (X[i]) X[i] = 32'($urandom_range(0, 255));
    foreach (H[i]) H[i] = 32'($urandom_range(1, 200));
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      set_mulcsr(m ? 32'h1 : 32'h0);
      conv2d(3, m); conv2d(6, m); matmul(3, m); matmul(6, m);
      factorial(m); fir(m); iir(m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
