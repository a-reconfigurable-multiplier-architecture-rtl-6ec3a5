// tb_rmul16 - checks the four-cycle 16x16 multiplier.
// Random and corner operands in exact mode (against a*b) and at random Er
// (against the reference model), the 5-cycle start-to-done latency, busy
// during the operation, a start while busy being ignored, and the product
// holding after done. Runs the default SSM variant and a DFM instance.
module tb_rmul16;
  import rmul_pkg::*;
  import rmul_ref_pkg::*;

  logic        clk = 0, rst_n = 0, start = 0;
  logic [15:0] a = '0, b = '0;
  logic [7:0]  er = 8'hFF;
  logic        busy_s, done_s, busy_d, done_d;
  logic [31:0] p_s, p_d;
  int checks = 0, failures = 0;

  rmul16                  dut_s (.clk, .rst_n, .start, .a, .b, .er, .busy(busy_s), .done(done_s), .p(p_s));
  rmul16 #(.VARIANT(DFM)) dut_d (.clk, .rst_n, .start, .a, .b, .er, .busy(busy_d), .done(done_d), .p(p_d));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (a=%h b=%h er=%h p_s=%h p_d=%h)", what, a, b, er, p_s, p_d);
    end
  endtask

  task automatic run(logic [15:0] x, logic [15:0] y, logic [7:0] e, bit poke_busy);
    int lat;
    logic [15:0] x_keep, y_keep;
    @(negedge clk);
    a = x; b = y; er = e; start = 1;
    x_keep = x; y_keep = y;
    @(negedge clk);
    start = 0;
    lat = 1;
    check("busy after start", busy_s && busy_d);
    if (poke_busy) begin
      a = ~x; b = ~y; start = 1;     // must be ignored
      @(negedge clk);
      start = 0;
      lat++;
    end
    while (!done_s) begin
      @(negedge clk);
      lat++;
      if (lat > 20) break;
    end
    a = x_keep; b = y_keep;
    check("latency 5 cycles", lat == 5);
    check("done together", done_d);
    check("SSM product", p_s === ref_mul16(1'b1, x_keep, y_keep, e));
    check("DFM product", p_d === ref_mul16(1'b0, x_keep, y_keep, e));
    if (e == 8'hFF) check("exact product", p_s === 32'(x_keep) * 32'(y_keep));
    @(negedge clk);
    check("held after done", !done_s && !busy_s && p_s === ref_mul16(1'b1, x_keep, y_keep, e));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(16'hFFFF, 16'hFFFF, 8'hFF, 0);
    run(16'h0000, 16'h1234, 8'hFF, 0);
    run(16'h00FF, 16'hFF00, 8'hFF, 1);
    run(16'hFFFF, 16'hFFFF, 8'h00, 0);
    for (int i = 0; i < 300; i++) run(16'($urandom), 16'($urandom), 8'hFF, i % 7 == 0);
    for (int i = 0; i < 300; i++) run(16'($urandom), 16'($urandom), 8'($urandom), i % 5 == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
