// full_adder - exact one-bit full adder.
//
// Used in the exact (white) cells of the 8-bit multiplier's reduction tree.
// Purely combinational: sum = a ^ b ^ c, cout = majority(a, b, c).
module full_adder (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic sum,
  output logic cout
);
  assign sum  = a ^ b ^ c;
  assign cout = (a & b) | (a & c) | (b & c);
endmodule
