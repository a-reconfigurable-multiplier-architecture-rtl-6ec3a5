// tb_ssc - exhaustive check of the single-stacking 4:2 compressor against the
// compressor truth table. Exact mode: all 32 cases are exact. Approximate
// mode: every listed row (8 erroneous ones with ED +1, 5 exact ones) has the
// table's Cout/Carry/Sum, and the 19 unlisted cases are exact.
module tb_ssc;
  logic [3:0] x;
  logic cin, er, sum, carry, cout;
  int checks = 0, failures = 0, nerr = 0;

  ssc dut (.x, .cin, .er, .sum, .carry, .cout);

  typedef struct { logic [4:0] in; logic co, ca, s; int ed; } row_t;
  row_t rows [13] = '{
    '{5'b00011, 0, 1, 1, 1}, '{5'b00101, 0, 1, 1, 1}, '{5'b01001, 0, 1, 1, 1},
    '{5'b01100, 0, 1, 0, 0}, '{5'b01101, 0, 1, 1, 0}, '{5'b01110, 0, 1, 1, 0},
    '{5'b01111, 1, 1, 1, 1}, '{5'b10001, 0, 1, 1, 1}, '{5'b10100, 0, 1, 0, 0},
    '{5'b10110, 0, 1, 1, 0}, '{5'b10111, 1, 1, 1, 1}, '{5'b11011, 1, 1, 1, 1},
    '{5'b11101, 1, 1, 1, 1}};

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int find_row(logic [4:0] in);
    foreach (rows[i]) if (rows[i].in == in) return i;
    return -1;
  endfunction

  initial begin
    for (int e = 0; e < 2; e++)
      for (int v = 0; v < 32; v++) begin
        int ex, got, r;
        logic [4:0] in;
        in = 5'(v);
        er = 1'(e);
        x = {in[1], in[2], in[3], in[4]};
        cin = in[0];
        #1;
        ex  = x[0] + x[1] + x[2] + x[3] + cin;
        got = sum + 2 * (carry + cout);
        r   = find_row(in);
        if (!er && got != ex) nerr++;
        checks++;
        if (er || r < 0) begin
          if (got != ex) begin
            failures++;
            $display("FAIL er=%0b in=%b: value %0d, expected %0d", er, in, got, ex);
          end
        end else if (cout !== rows[r].co || carry !== rows[r].ca || sum !== rows[r].s ||
                     (got - ex) != rows[r].ed) begin
          failures++;
          $display("FAIL approx in=%b: %0b%0b%0b, table %0b%0b%0b", in,
                   cout, carry, sum, rows[r].co, rows[r].ca, rows[r].s);
        end
      end
    checks++;
    if (nerr != 8) begin
      failures++;
      $display("FAIL %0d erroneous approximate cases, expected 8", nerr);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
