// rcomp42 - reconfigurable 4:2 compressor cell of the multiplier tree.
//
// Selects the compressor family at elaboration time: the DFC for the DFM
// multiplier, the SSC for the SSM multiplier. Same pins as both.
module rcomp42
  import rmul_pkg::*;
#(
  parameter mul_variant_e VARIANT = SSM
) (
  input  logic [3:0] x,
  input  logic       cin,
  input  logic       er,     // 1 = exact, 0 = approximate
  output logic       sum,
  output logic       carry,
  output logic       cout
);
  if (VARIANT == DFM) begin : g_dfc
    dfc u_c (.x(x), .cin(cin), .er(er), .sum(sum), .carry(carry), .cout(cout));
  end else begin : g_ssc
    ssc u_c (.x(x), .cin(cin), .er(er), .sum(sum), .carry(carry), .cout(cout));
  end
endmodule
