// rmul_ref_pkg - reference models for the testbenches.
//
// ref_mul8 recomputes the 8x8 reconfigurable product column by column from
// a list-based description of the dot diagram (the same cell placement as
// rmul8, written independently with integer column sums), using the
// compressor behaviours of the truth table: the DFC as two reconfigurable
// full adders, the SSC as "sum = parity | cin in approximate mode".
// ref_mul16 / ref_mul32 compose it the way the 16- and 32-bit multipliers
// are specified (shifted sub-products).
package rmul_ref_pkg;

  typedef logic [2:0] cell_t;   // {cout, carry, sum}

  function automatic logic [1:0] ref_rfa(input logic a, b, c, er);  // {cout,sum}
    if (er) return {(a & b) | (a & c) | (b & c), a ^ b ^ c};
    return {a & (b | c), (a ^ b) | c};
  endfunction

  function automatic cell_t ref_comp(input bit ssm, input logic [3:0] x,
                                     input logic cin, input logic er);
    int n;
    logic [1:0] r1, r2;
    if (ssm) begin
      n = x[0] + x[1] + x[2] + x[3] + cin;
      return {n >= 4, n >= 2, er ? logic'(n % 2) : logic'(((x[0]+x[1]+x[2]+x[3]) % 2) | cin)};
    end
    r1 = ref_rfa(x[0], x[1], x[2], er);
    r2 = ref_rfa(x[3], r1[0], cin, er);
    return {r1[1], r2[1], r2[0]};
  endfunction

  function automatic logic [1:0] ref_fa(input logic a, b, c);       // {carry,sum}
    int s;
    s = a + b + c;
    return 2'(s);
  endfunction

  function automatic logic [15:0] ref_mul8(input bit ssm, input logic [7:0] a, b,
                                           input logic [7:0] er);
    logic d [15][8];
    logic e [15][4];
    int   nd [15];
    cell_t r5, r6, r7a, r7b, r8a, r8b, r9, r10, rc;
    logic [1:0] f4, f6, f9, f11, f2, f13;
    logic co;
    int unsigned tot;
    for (int c = 0; c < 15; c++) begin
      nd[c] = 0;
      for (int k = 0; k < 8; k++) d[c][k] = 1'b0;
      for (int k = 0; k < 4; k++) e[c][k] = 1'b0;
      for (int i = 0; i < 8; i++)
        if (c - i >= 0 && c - i < 8) begin
          d[c][nd[c]] = a[c-i] & b[i];
          nd[c]++;
        end
    end
    // stage 1
    f4  = ref_fa(d[4][0], d[4][1], d[4][2]);
    r5  = ref_comp(ssm, {d[5][3], d[5][2], d[5][1], d[5][0]}, f4[1], er[2]);
    r6  = ref_comp(ssm, {d[6][3], d[6][2], d[6][1], d[6][0]}, r5[2], er[3]);
    f6  = ref_fa(d[6][4], d[6][5], d[6][6]);
    r7a = ref_comp(ssm, {d[7][3], d[7][2], d[7][1], d[7][0]}, r6[2], er[4]);
    r7b = ref_comp(ssm, {d[7][7], d[7][6], d[7][5], d[7][4]}, f6[1], er[4]);
    r8a = ref_comp(ssm, {d[8][3], d[8][2], d[8][1], d[8][0]}, r7a[2], er[5]);
    r8b = ref_comp(ssm, {1'b0, d[8][6], d[8][5], d[8][4]}, r7b[2], er[5]);
    r9  = ref_comp(ssm, {d[9][3], d[9][2], d[9][1], d[9][0]}, r8a[2], er[6]);
    f9  = ref_fa(d[9][4], d[9][5], r8b[2]);
    r10 = ref_comp(ssm, {d[10][3], d[10][2], d[10][1], d[10][0]}, r9[2], er[7]);
    f11 = ref_fa(d[11][0], d[11][1], d[11][2]);
    for (int k = 0; k < 4; k++) begin
      e[0][k] = (k < 1) ? d[0][k] : 1'b0;
      e[1][k] = (k < 2) ? d[1][k] : 1'b0;
      e[2][k] = (k < 3) ? d[2][k] : 1'b0;
      e[3][k] = d[3][k];
    end
    e[4][0] = f4[0];   e[4][1] = d[4][3];  e[4][2] = d[4][4];
    e[5][0] = r5[0];   e[5][1] = d[5][4];  e[5][2] = d[5][5];
    e[6][0] = r6[0];   e[6][1] = f6[0];    e[6][2] = r5[1];
    e[7][0] = r7a[0];  e[7][1] = r7b[0];   e[7][2] = r6[1];
    e[8][0] = r8a[0];  e[8][1] = r8b[0];   e[8][2] = r7a[1];  e[8][3] = r7b[1];
    e[9][0] = r9[0];   e[9][1] = f9[0];    e[9][2] = r8a[1];  e[9][3] = r8b[1];
    e[10][0] = r10[0]; e[10][1] = d[10][4]; e[10][2] = r9[1]; e[10][3] = f9[1];
    e[11][0] = f11[0]; e[11][1] = d[11][3]; e[11][2] = r10[1]; e[11][3] = r10[2];
    e[12][0] = d[12][0]; e[12][1] = d[12][1]; e[12][2] = d[12][2]; e[12][3] = f11[1];
    e[13][0] = d[13][0]; e[13][1] = d[13][1];
    e[14][0] = d[14][0];
    // stage 2 and final addition, as integer weights
    tot = e[0][0] + 2 * (e[1][0] + e[1][1]);
    f2  = ref_fa(e[2][0], e[2][1], e[2][2]);
    tot += 4 * f2[0] + 8 * f2[1];
    co = 1'b0;
    for (int c = 3; c <= 12; c++) begin
      rc = ref_comp((c <= 10) ? ssm : 1'b0, {e[c][3], e[c][2], e[c][1], e[c][0]}, co,
                    (c <= 10) ? er[c-3] : 1'b1);
      tot += (int'(rc[0]) << c) + (int'(rc[1]) << (c + 1));
      co = rc[2];
    end
    f13 = ref_fa(e[13][0], e[13][1], co);
    tot += (int'(f13[0]) << 13) + (int'(f13[1]) << 14) + (int'(e[14][0]) << 14);
    return 16'(tot);
  endfunction

  function automatic logic [31:0] ref_mul16(input bit ssm, input logic [15:0] a, b,
                                            input logic [7:0] er);
    return 32'(ref_mul8(ssm, a[7:0],  b[7:0],  er))
         + (32'(ref_mul8(ssm, a[15:8], b[7:0],  er)) << 8)
         + (32'(ref_mul8(ssm, a[7:0],  b[15:8], er)) << 8)
         + (32'(ref_mul8(ssm, a[15:8], b[15:8], er)) << 16);
  endfunction

  function automatic logic [63:0] ref_mul32(input bit ssm, input logic [31:0] a, b,
                                            input logic [7:0] er_ll, er_mid, er_hh);
    return 64'(ref_mul16(ssm, a[15:0],  b[15:0],  er_ll))
         + (64'(ref_mul16(ssm, a[15:0],  b[31:16], er_mid)) << 16)
         + (64'(ref_mul16(ssm, a[31:16], b[15:0],  er_mid)) << 16)
         + (64'(ref_mul16(ssm, a[31:16], b[31:16], er_hh)) << 32);
  endfunction

endpackage
