// ex_mul_top - the approximation-controlled multiply path of the execution
// stage: the approximation CSRs feeding the reconfigurable multiplier unit.
//
// A CSR access (csr_en/csr_op/csr_addr/csr_wdata, as decoded from a
// csrrw/csrrs/csrrc instruction) updates alucsr, mulcsr or divcsr at the
// clock edge; the old value comes back on csr_rdata. A multiply (mul_start
// with funct3 of MUL/MULH/MULHSU/MULHU and operands rs1, rs2) runs on the
// multiplier unit under the current mulcsr: mul_done and mul_result follow
// five cycles after mul_start, mul_busy is the stall request. alucsr and
// divcsr are brought out for the ALU and divider, which are not part of
// this design. mulcsr is also brought out for observation.
module ex_mul_top
  import rmul_pkg::*;
#(
  parameter mul_variant_e VARIANT = SSM
) (
  input  logic        clk,
  input  logic        rst_n,
  // CSR access port
  input  logic        csr_en,
  input  csr_op_e     csr_op,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output logic        csr_hit,
  // multiply port
  input  logic        mul_start,
  input  logic [2:0]  mul_funct3,
  input  logic [31:0] rs1,
  input  logic [31:0] rs2,
  output logic        mul_busy,
  output logic        mul_done,
  output logic [31:0] mul_result,
  // control registers for the other execution units
  output logic [31:0] alucsr,
  output logic [31:0] mulcsr,
  output logic [31:0] divcsr
);
  approx_csr u_csr (
    .clk, .rst_n, .csr_en, .csr_op, .csr_addr, .csr_wdata, .csr_rdata, .csr_hit,
    .alucsr, .mulcsr, .divcsr);

  mul_unit #(.VARIANT(VARIANT)) u_mul (
    .clk, .rst_n, .start(mul_start), .funct3(mul_funct3), .rs1, .rs2, .mulcsr,
    .busy(mul_busy), .done(mul_done), .result(mul_result));
endmodule
