// comp42_exact - exact 4:2 compressor.
//
// Adds five bits of one column, x[3:0] and cin, and returns them as
// x0+x1+x2+x3+cin = sum + 2*(carry + cout). cout depends only on x[2:0], so
// a row of these cells has no ripple path. Built from two full adders in the
// usual way; used in the exact (white) 4:2 cells of the multiplier tree.
module comp42_exact (
  input  logic [3:0] x,
  input  logic       cin,
  output logic       sum,
  output logic       carry,
  output logic       cout
);
  logic s1;
  full_adder u_fa1 (.a(x[0]), .b(x[1]), .c(x[2]), .sum(s1),  .cout(cout));
  full_adder u_fa2 (.a(x[3]), .b(s1),   .c(cin),  .sum(sum), .cout(carry));
endmodule
