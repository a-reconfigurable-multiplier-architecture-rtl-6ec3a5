// dfc - dual-full-adder reconfigurable 4:2 compressor (DFC).
//
// Two reconfigurable full adders in series, both driven by the same error
// control er (1 = exact). The first adds x[0..2] and produces cout; the
// second adds its sum with x[3] and cin and produces carry and sum, so
//   x0+x1+x2+x3+cin = sum + 2*(carry + cout)   when er = 1.
// With er = 0, 13 of the 32 input cases are wrong, by +1, -1 or -2.
// The pin order of the second adder (x[3] on its A pin, the first sum on B)
// is this design's reading: it is the order that reproduces the paper's
// truth table. Combinational.
module dfc (
  input  logic [3:0] x,      // x[0] = X1 ... x[3] = X4
  input  logic       cin,
  input  logic       er,     // 1 = exact, 0 = approximate
  output logic       sum,
  output logic       carry,
  output logic       cout
);
  logic s1;
  rfa u_rfa1 (.a(x[0]), .b(x[1]), .cin(x[2]), .er(er), .sum(s1),  .cout(cout));
  rfa u_rfa2 (.a(x[3]), .b(s1),   .cin(cin),  .er(er), .sum(sum), .cout(carry));
endmodule
