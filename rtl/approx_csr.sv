// approx_csr - the three approximation-control CSRs of the execution stage:
// alucsr (0x800), mulcsr (0x801) and divcsr (0x802).
//
// One CSR access per cycle: csr_en with csr_op = write / set / clear and the
// 12-bit address, as decoded from csrrw/csrrs/csrrc (or their immediate
// forms, with the zero-extended immediate as csr_wdata). csr_rdata returns
// the old value combinationally (for the instruction's rd) and csr_hit says
// whether the address is one of the three. The new value is written at the
// clock edge and seen by the next instruction. All three reset to zero,
// which is exact operation. The addresses follow the paper; the access port
// is this design's own, standing in for the core's CSR file.
module approx_csr
  import rmul_pkg::*;
#(
  parameter logic [11:0] ALU_ADDR = ALUCSR_ADDR,
  parameter logic [11:0] MUL_ADDR = MULCSR_ADDR,
  parameter logic [11:0] DIV_ADDR = DIVCSR_ADDR
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        csr_en,
  input  csr_op_e     csr_op,
  input  logic [11:0] csr_addr,
  input  logic [31:0] csr_wdata,
  output logic [31:0] csr_rdata,
  output logic        csr_hit,
  output logic [31:0] alucsr,
  output logic [31:0] mulcsr,
  output logic [31:0] divcsr
);
  logic [2:0]  sel;     // one-hot: alu, mul, div
  logic [31:0] nxt;

  assign sel     = {csr_addr == DIV_ADDR, csr_addr == MUL_ADDR, csr_addr == ALU_ADDR};
  assign csr_hit = |sel;

  always_comb begin
    unique case (1'b1)
      sel[0]:  csr_rdata = alucsr;
      sel[1]:  csr_rdata = mulcsr;
      sel[2]:  csr_rdata = divcsr;
      default: csr_rdata = '0;
    endcase
  end

  always_comb begin
    unique case (csr_op)
      CSR_WRITE: nxt = csr_wdata;
      CSR_SET:   nxt = csr_rdata | csr_wdata;
      CSR_CLEAR: nxt = csr_rdata & ~csr_wdata;
      default:   nxt = csr_rdata;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alucsr <= '0;
      mulcsr <= '0;
      divcsr <= '0;
    end else if (csr_en && csr_op != CSR_NONE) begin
      if (sel[0]) alucsr <= nxt;
      if (sel[1]) mulcsr <= nxt;
      if (sel[2]) divcsr <= nxt;
    end
  end
endmodule
