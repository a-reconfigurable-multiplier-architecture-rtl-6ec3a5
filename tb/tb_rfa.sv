// tb_rfa - exhaustive check of the reconfigurable full adder.
// All 16 input combinations: exact full-adder behaviour when er = 1, and the
// approximate sum/carry of the truth-table derivation when er = 0. Also
// checks that approximation changes the result in some cases.
module tb_rfa;
  logic a, b, cin, er, sum, cout;
  int checks = 0, failures = 0, nerr = 0;

  rfa dut (.a, .b, .cin, .er, .sum, .cout);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 16; v++) begin
      int exp_val, got;
      logic exp_s, exp_c;
      {er, a, b, cin} = 4'(v);
      #1;
      exp_val = a + b + cin;
      got     = 2 * cout + sum;
      if (er) begin
        exp_s = exp_val[0];
        exp_c = exp_val >= 2;
      end else begin
        exp_s = (a != b) || cin;
        exp_c = a && (b || cin);
        if (got != exp_val) nerr++;
      end
      checks++;
      if (sum !== exp_s || cout !== exp_c) begin
        failures++;
        $display("FAIL er=%0b a=%0b b=%0b cin=%0b: sum=%0b cout=%0b, expected %0b %0b",
                 er, a, b, cin, sum, cout, exp_s, exp_c);
      end
    end
    checks++;
    if (nerr != 2) begin
      failures++;
      $display("FAIL approximate RFA wrong in %0d of 8 cases, expected 2", nerr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
