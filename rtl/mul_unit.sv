// mul_unit - multiplier unit of the execution stage.
//
// Decodes mulcsr and drives the 32-bit reconfigurable multiplier:
//   * mulcsr[0] (approximation enable): when 0 every Er is forced to 8'hFF
//     and the product is exact; when 1 the three Er fields are used as set.
//   * mulcsr[2:1] (circuit select): 2'b00 selects the reconfigurable
//     multiplier; the other codes name reserved circuits that are not
//     built, and the unit then returns 0.
// The multiplier is unsigned. For MULH and MULHSU the operands are turned
// into magnitudes, multiplied, and the 64-bit product is negated when the
// signs differ; MUL returns the low word, the MULH* forms the high word.
// The control fields are captured with the operands, so a CSR write after
// start does not disturb an operation in flight.
//
// Timing: start in cycle t (ignored while busy), done and result in cycle
// t+5; busy from t+1 to t+4 (the core stalls on it). result holds until the
// next start. The mulcsr layout follows the paper; sign handling, the
// reserved-code behaviour and the handshake are this design's own.
module mul_unit
  import rmul_pkg::*;
#(
  parameter mul_variant_e VARIANT = SSM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  funct3,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  input  logic [31:0] mulcsr,
  output logic        busy,
  output logic        done,
  output logic [31:0] result
);
  mulcsr_t     csr;
  logic        s1, s2;              // operand is signed and negative
  logic [31:0] mag1, mag2;
  logic [7:0]  er_ll, er_mid, er_hh;
  logic [63:0] p_u;
  logic        m_busy;

  // state captured at start
  logic        neg_q;
  logic        high_q;
  logic        ckt_ok_q;

  assign csr = mulcsr_t'(mulcsr);

  always_comb begin
    s1 = 1'b0;
    s2 = 1'b0;
    unique case (mul_funct3_e'(funct3))
      F3_MULH:   begin s1 = rs1[31]; s2 = rs2[31]; end
      F3_MULHSU: begin s1 = rs1[31]; end
      default: ;
    endcase
  end

  assign mag1 = s1 ? (~rs1 + 32'd1) : rs1;
  assign mag2 = s2 ? (~rs2 + 32'd1) : rs2;

  assign er_ll  = csr.approx_en ? csr.er_ll  : ER_EXACT;
  assign er_mid = csr.approx_en ? csr.er_mid : ER_EXACT;
  assign er_hh  = csr.approx_en ? csr.er_hh  : ER_EXACT;

  rmul32 #(.VARIANT(VARIANT)) u_rmul32 (
    .clk, .rst_n, .start(start && !m_busy), .a(mag1), .b(mag2),
    .er_ll, .er_mid, .er_hh, .busy(m_busy), .done, .p(p_u));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      neg_q    <= 1'b0;
      high_q   <= 1'b0;
      ckt_ok_q <= 1'b1;
    end else if (start && !m_busy) begin
      neg_q    <= s1 ^ s2;
      high_q   <= (funct3 != F3_MUL);
      ckt_ok_q <= (csr.ckt_sel == CKT_RECONF);
    end
  end

  logic [63:0] p_s;
  assign p_s  = neg_q ? (~p_u + 64'd1) : p_u;
  assign busy = m_busy;

  // output multiplexer: the reconfigurable circuit or a reserved (absent) one
  assign result = !ckt_ok_q ? 32'b0 : (high_q ? p_s[63:32] : p_s[31:0]);
endmodule
