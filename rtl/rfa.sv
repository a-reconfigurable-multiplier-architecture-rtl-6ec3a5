// rfa - reconfigurable full adder (RFA).
//
// With er = 1 it is an exact full adder. With er = 0 the carry-in is kept
// out of the carry path and the sum's final XOR becomes an OR, which lowers
// switching activity at the cost of error:
//   er = 1 : sum = a ^ b ^ cin           cout = maj(a, b, cin)
//   er = 0 : sum = (a ^ b) | cin         cout = a & (b | cin)
// The equations were read from the paper's RFA schematic; combined into the
// DFC they reproduce the paper's compressor truth table. Combinational.
module rfa (
  input  logic a,
  input  logic b,
  input  logic cin,
  input  logic er,     // 1 = exact, 0 = approximate
  output logic sum,
  output logic cout
);
  logic p;
  logic cin_er;

  assign p      = a ^ b;
  assign cin_er = cin & er;
  assign sum    = (p | cin) & ~(p & cin_er);
  assign cout   = (b & cin_er) | (a & (b | cin));
endmodule
