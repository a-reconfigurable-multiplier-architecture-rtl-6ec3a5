// tb_rmul32 - checks the 32x32 -> 64 multiplier built from four 16-bit units.
// Exact mode against a*b, random per-unit Er against the reference model
// (which must show each Er field acting on its own sub-product), and the
// 5-cycle latency.
module tb_rmul32;
  import rmul_pkg::*;
  import rmul_ref_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0;
  logic [31:0] a = '0, b = '0;
  logic [7:0]  er_ll = 8'hFF, er_mid = 8'hFF, er_hh = 8'hFF;
  logic        busy, done;
  logic [63:0] p;
  int checks = 0, failures = 0;

  rmul32 dut (.clk, .rst_n, .start, .a, .b, .er_ll, .er_mid, .er_hh, .busy, .done, .p);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (a=%h b=%h er=%h/%h/%h p=%h)", what, a, b, er_ll, er_mid, er_hh, p);
    end
  endtask

  task automatic run(logic [31:0] x, y, logic [7:0] el, em, eh);
    int lat;
    @(negedge clk);
    a = x; b = y; er_ll = el; er_mid = em; er_hh = eh; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done && lat < 20) begin
      @(negedge clk);
      lat++;
    end
    check("latency 5 cycles", lat == 5);
    check("product", p === ref_mul32(1'b1, x, y, el, em, eh));
    if ({el, em, eh} == 24'hFFFFFF) check("exact", p === 64'(x) * 64'(y));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(32'hFFFF_FFFF, 32'hFFFF_FFFF, 8'hFF, 8'hFF, 8'hFF);
    run(32'h8000_0001, 32'h7FFF_FFFF, 8'hFF, 8'hFF, 8'hFF);
    // one field at a time approximated: only that field's sub-products move
    run(32'hFFFF_FFFF, 32'hFFFF_FFFF, 8'h00, 8'hFF, 8'hFF);
    check("low field changes product", p !== 64'hFFFF_FFFE_0000_0001);
    run(32'hFFFF_FFFF, 32'hFFFF_FFFF, 8'hFF, 8'h00, 8'hFF);
    check("mid field changes product", p !== 64'hFFFF_FFFE_0000_0001);
    run(32'hFFFF_FFFF, 32'hFFFF_FFFF, 8'hFF, 8'hFF, 8'h00);
    check("high field changes product", p !== 64'hFFFF_FFFE_0000_0001);
    for (int i = 0; i < 300; i++) run($urandom, $urandom, 8'hFF, 8'hFF, 8'hFF);
    for (int i = 0; i < 300; i++) run($urandom, $urandom, 8'($urandom), 8'($urandom), 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
