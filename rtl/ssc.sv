// ssc - single-stacking reconfigurable 4:2 compressor (SSC).
//
// The four column bits are first "stacked" (x0|x1, x0&x1, x2|x3, x2&x3),
// which gives their count n and parity directly. The weight-2 part of
// n + cin is split over carry (set from 2) and cout (set from 4); the sum
// is parity ^ cin in exact mode (er = 1) and parity | cin in approximate
// mode (er = 0). The approximate compressor therefore errs only when cin = 1
// and n is odd: 8 of the 32 input cases, always by +1, as in the paper's
// truth table. The function is taken from that table; the split of the
// weight-2 part in the rows it does not list is this design's choice.
// Combinational.
module ssc (
  input  logic [3:0] x,      // x[0] = X1 ... x[3] = X4
  input  logic       cin,
  input  logic       er,     // 1 = exact, 0 = approximate
  output logic       sum,
  output logic       carry,
  output logic       cout
);
  logic       or_ab, and_ab, or_cd, and_cd;
  logic       par;
  logic [2:0] n;       // x0+x1+x2+x3+cin, 0..5

  // single-stage stacking of the two input pairs
  assign or_ab  = x[0] | x[1];
  assign and_ab = x[0] & x[1];
  assign or_cd  = x[2] | x[3];
  assign and_cd = x[2] & x[3];

  // parity of the four bits from the stacked pairs
  assign par = (or_ab & ~and_ab) ^ (or_cd & ~and_cd);

  assign n = 3'(or_ab) + 3'(and_ab) + 3'(or_cd) + 3'(and_cd) + 3'(cin);

  assign carry = (n >= 3'd2);
  assign cout  = (n >= 3'd4);
  assign sum   = er ? (par ^ cin) : (par | cin);
endmodule
