// rmul8 - 8x8 unsigned multiplier with runtime-reconfigurable accuracy.
//
// The 64 partial-product bits a[j]&b[i] (weight 2^(i+j)) are reduced to two
// rows in two stages and then added by an exact carry-propagate adder.
// Columns 3..10 (0-based; heights 4,5,6,7,8,7,6,5) form the reconfigurable
// region: every 4:2 compressor there is a reconfigurable one (DFC or SSC,
// chosen by VARIANT) whose error control is er[c-3]. Columns 0..2 and 11..14
// use only exact cells. er = 8'hFF gives the exact product, er = 8'h00 the
// most approximate one; er[7] controls the most significant column.
//
// Cell placement, stage by stage (c = column, "RC" reconfigurable 4:2,
// "FA" exact full adder, "EC" exact 4:2, cin chains run to the left):
//   stage 1  c4: FA      c5: RC       c6: RC + FA   c7: RC + RC
//            c8: RC + RC(3 bits)      c9: RC + FA   c10: RC   c11: FA
//            upper RC chain c5->c10 starts from the c4 FA carry and ends as
//            a bit of c11; lower chain c6 FA -> c7 RC -> c8 RC -> c9 FA
//   stage 2  c2: FA, c3..c10: RC (chain from c3, cin 0), c11, c12: EC,
//            c13: FA, ending as a bit of c14
// This placement follows the paper's dot diagram. Which partial-product
// bit sits where inside a column is not given there: here bits are taken
// in order of increasing i. Purely combinational.
module rmul8
  import rmul_pkg::*;
#(
  parameter mul_variant_e VARIANT = SSM
) (
  input  logic [7:0]  a,
  input  logic [7:0]  b,
  input  logic [7:0]  er,   // bit k controls column k+3; 1 = exact
  output logic [15:0] p
);
  // d[c][k]: k-th partial-product bit of column c
  logic [7:0] d [15];

  always_comb begin
    for (int c = 0; c < 15; c++) begin
      d[c] = '0;
      for (int k = 0; k < 8; k++) begin
        int i;
        i = ((c > 7) ? c - 7 : 0) + k;
        if (i <= 7 && i <= c && (c - i) <= 7)
          d[c][k] = a[c-i] & b[i];
      end
    end
  end

  // ---------------- stage 1 ----------------
  logic fa4_s, fa4_c;
  logic rc5_s, rc5_ca, rc5_co;
  logic rc6_s, rc6_ca, rc6_co, fa6_s, fa6_c;
  logic rc7a_s, rc7a_ca, rc7a_co, rc7b_s, rc7b_ca, rc7b_co;
  logic rc8a_s, rc8a_ca, rc8a_co, rc8b_s, rc8b_ca, rc8b_co;
  logic rc9_s, rc9_ca, rc9_co, fa9_s, fa9_c;
  logic rc10_s, rc10_ca, rc10_co;
  logic fa11_s, fa11_c;

  full_adder u1_fa4 (.a(d[4][0]), .b(d[4][1]), .c(d[4][2]), .sum(fa4_s), .cout(fa4_c));

  rcomp42 #(.VARIANT(VARIANT)) u1_rc5 (
    .x(d[5][3:0]), .cin(fa4_c), .er(er[2]), .sum(rc5_s), .carry(rc5_ca), .cout(rc5_co));

  rcomp42 #(.VARIANT(VARIANT)) u1_rc6 (
    .x(d[6][3:0]), .cin(rc5_co), .er(er[3]), .sum(rc6_s), .carry(rc6_ca), .cout(rc6_co));
  full_adder u1_fa6 (.a(d[6][4]), .b(d[6][5]), .c(d[6][6]), .sum(fa6_s), .cout(fa6_c));

  rcomp42 #(.VARIANT(VARIANT)) u1_rc7a (
    .x(d[7][3:0]), .cin(rc6_co), .er(er[4]), .sum(rc7a_s), .carry(rc7a_ca), .cout(rc7a_co));
  rcomp42 #(.VARIANT(VARIANT)) u1_rc7b (
    .x(d[7][7:4]), .cin(fa6_c),  .er(er[4]), .sum(rc7b_s), .carry(rc7b_ca), .cout(rc7b_co));

  rcomp42 #(.VARIANT(VARIANT)) u1_rc8a (
    .x(d[8][3:0]), .cin(rc7a_co), .er(er[5]), .sum(rc8a_s), .carry(rc8a_ca), .cout(rc8a_co));
  rcomp42 #(.VARIANT(VARIANT)) u1_rc8b (
    .x({1'b0, d[8][6:4]}), .cin(rc7b_co), .er(er[5]), .sum(rc8b_s), .carry(rc8b_ca), .cout(rc8b_co));

  rcomp42 #(.VARIANT(VARIANT)) u1_rc9 (
    .x(d[9][3:0]), .cin(rc8a_co), .er(er[6]), .sum(rc9_s), .carry(rc9_ca), .cout(rc9_co));
  full_adder u1_fa9 (.a(d[9][4]), .b(d[9][5]), .c(rc8b_co), .sum(fa9_s), .cout(fa9_c));

  rcomp42 #(.VARIANT(VARIANT)) u1_rc10 (
    .x(d[10][3:0]), .cin(rc9_co), .er(er[7]), .sum(rc10_s), .carry(rc10_ca), .cout(rc10_co));

  full_adder u1_fa11 (.a(d[11][0]), .b(d[11][1]), .c(d[11][2]), .sum(fa11_s), .cout(fa11_c));

  // stage-1 result, at most four bits per column: e[c][k]
  logic [3:0] e [15];
  always_comb begin
    for (int c = 0; c < 15; c++) e[c] = '0;
    e[0]  = {3'b0, d[0][0]};
    e[1]  = {2'b0, d[1][1:0]};
    e[2]  = {1'b0, d[2][2:0]};
    e[3]  = d[3][3:0];
    e[4]  = {1'b0, d[4][4], d[4][3], fa4_s};
    e[5]  = {1'b0, d[5][5], d[5][4], rc5_s};
    e[6]  = {1'b0, rc5_ca, fa6_s, rc6_s};
    e[7]  = {1'b0, rc6_ca, rc7b_s, rc7a_s};
    e[8]  = {rc7b_ca, rc7a_ca, rc8b_s, rc8a_s};
    e[9]  = {rc8b_ca, rc8a_ca, fa9_s, rc9_s};
    e[10] = {fa9_c, rc9_ca, d[10][4], rc10_s};
    e[11] = {rc10_co, rc10_ca, d[11][3], fa11_s};
    e[12] = {fa11_c, d[12][2:0]};
    e[13] = {2'b0, d[13][1:0]};
    e[14] = {3'b0, d[14][0]};
  end

  // ---------------- stage 2 ----------------
  logic       fa2_s, fa2_c;
  logic [12:3] s2_s, s2_ca, s2_co;   // compressors of columns 3..12
  logic       fa13_s, fa13_c;

  full_adder u2_fa2 (.a(e[2][0]), .b(e[2][1]), .c(e[2][2]), .sum(fa2_s), .cout(fa2_c));

  for (genvar c = 3; c <= 12; c++) begin : g_s2
    logic cin;
    if (c == 3) begin : g_first
      assign cin = 1'b0;
    end else begin : g_chain
      assign cin = s2_co[c-1];
    end
    if (c <= 10) begin : g_rc
      rcomp42 #(.VARIANT(VARIANT)) u_rc (
        .x(e[c]), .cin(cin), .er(er[c-3]), .sum(s2_s[c]), .carry(s2_ca[c]), .cout(s2_co[c]));
    end else begin : g_ec
      comp42_exact u_ec (
        .x(e[c]), .cin(cin), .sum(s2_s[c]), .carry(s2_ca[c]), .cout(s2_co[c]));
    end
  end

  full_adder u2_fa13 (.a(e[13][0]), .b(e[13][1]), .c(s2_co[12]), .sum(fa13_s), .cout(fa13_c));

  // ---------------- final two rows and carry-propagate adder ----------------
  logic [15:0] row0, row1;
  always_comb begin
    row0 = '0;
    row1 = '0;
    row0[0] = e[0][0];
    row0[1] = e[1][0];
    row1[1] = e[1][1];
    row0[2] = fa2_s;
    row1[3] = fa2_c;
    for (int c = 3; c <= 12; c++) begin
      row0[c]   = s2_s[c];
      row1[c+1] = s2_ca[c];
    end
    row0[13] = fa13_s;
    row0[14] = e[14][0];
    row1[14] = fa13_c;
  end

  assign p = row0 + row1;
endmodule
