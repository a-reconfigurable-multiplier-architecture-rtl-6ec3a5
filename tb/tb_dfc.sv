// tb_dfc - exhaustive check of the dual-full-adder 4:2 compressor against the
// compressor truth table. Exact mode: all 32 cases give
// sum + 2*(carry + cout) = x0+x1+x2+x3+cin. Approximate mode: the 13
// erroneous cases of the table, with their Cout/Carry/Sum and error
// distance, and exactness in the other 19 cases.
module tb_dfc;
  logic [3:0] x;
  logic cin, er, sum, carry, cout;
  int checks = 0, failures = 0;

  dfc dut (.x, .cin, .er, .sum, .carry, .cout);

  // table rows: {X1 X2 X3 X4 Cin}, Cout, Carry, Sum, ED
  typedef struct { logic [4:0] in; logic co, ca, s; int ed; bit check_sum; } row_t;
  row_t rows [13] = '{
    '{5'b00011, 0, 1, 1,  1, 1}, '{5'b00101, 0, 0, 1, -1, 1}, '{5'b01001, 0, 0, 1, -1, 1},
    '{5'b01100, 0, 0, 1, -1, 1}, '{5'b01101, 0, 0, 1, -2, 1}, '{5'b01110, 0, 1, 0, -1, 1},
    '{5'b01111, 0, 1, 1, -1, 1}, '{5'b10001, 0, 0, 1, -1, 1}, '{5'b10100, 1, 0, 1,  1, 1},
    // the table's Sum cell of this row disagrees with its ED; ED is checked
    '{5'b10110, 1, 1, 1,  1, 0},
    '{5'b10111, 1, 1, 1,  1, 1}, '{5'b11011, 1, 1, 1,  1, 1}, '{5'b11101, 1, 0, 1, -1, 1}};

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
        x = {in[1], in[2], in[3], in[4]};   // in[4] = X1 ... in[1] = X4
        cin = in[0];
        #1;
        ex  = x[0] + x[1] + x[2] + x[3] + cin;
        got = sum + 2 * (carry + cout);
        r   = find_row(in);
        checks++;
        if (er || r < 0) begin
          if (got != ex) begin
            failures++;
            $display("FAIL er=%0b in=%b: value %0d, expected %0d", er, in, got, ex);
          end
        end else begin
          if (cout !== rows[r].co || carry !== rows[r].ca ||
              (rows[r].check_sum && sum !== rows[r].s) || (got - ex) != rows[r].ed) begin
            failures++;
            $display("FAIL approx in=%b: %0b%0b%0b ED %0d, table %0b%0b%0b ED %0d", in,
                     cout, carry, sum, got - ex, rows[r].co, rows[r].ca, rows[r].s, rows[r].ed);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
