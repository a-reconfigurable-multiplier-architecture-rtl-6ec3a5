// rmul_pkg - types and constants shared by the reconfigurable multiplier.
//
// Holds the choice of compressor family for the 8-bit multiplier (DFM uses
// the dual-full-adder compressor, SSM the single-stacking compressor), the
// field layout of the multiplier control CSR (mulcsr, address 0x801) and the
// RV32M funct3 codes of the four multiply instructions.
//
// mulcsr layout (bit 0 = LSB):
//   [0]      approximation enable, 1 = approximate, 0 = exact
//   [2:1]    circuit select, 2'b00 = the reconfigurable multiplier
//   [10:3]   Er for the low x low sub-multiplier
//   [18:11]  Er for the two cross sub-multipliers
//   [26:19]  Er for the high x high sub-multiplier
//   [31:27]  custom field, stored but unused
// The field positions and CSR addresses follow the paper; the rest is this
// design's own.
package rmul_pkg;

  typedef enum logic {
    DFM = 1'b0,   // 8-bit multiplier built with DFC compressors
    SSM = 1'b1    // 8-bit multiplier built with SSC compressors
  } mul_variant_e;

  typedef struct packed {
    logic [4:0] custom;
    logic [7:0] er_hh;
    logic [7:0] er_mid;
    logic [7:0] er_ll;
    logic [1:0] ckt_sel;
    logic       approx_en;
  } mulcsr_t;

  localparam logic [11:0] ALUCSR_ADDR = 12'h800;
  localparam logic [11:0] MULCSR_ADDR = 12'h801;
  localparam logic [11:0] DIVCSR_ADDR = 12'h802;

  // CSR access kinds (the immediate forms use the same codes, with the
  // zero-extended immediate as write data)
  typedef enum logic [1:0] {
    CSR_NONE  = 2'd0,
    CSR_WRITE = 2'd1,   // csrrw / csrrwi
    CSR_SET   = 2'd2,   // csrrs / csrrsi
    CSR_CLEAR = 2'd3    // csrrc / csrrci
  } csr_op_e;

  typedef enum logic [2:0] {
    F3_MUL    = 3'b000,
    F3_MULH   = 3'b001,
    F3_MULHSU = 3'b010,
    F3_MULHU  = 3'b011
  } mul_funct3_e;

  localparam logic [1:0] CKT_RECONF = 2'b00;
  localparam logic [7:0] ER_EXACT   = 8'hFF;

endpackage
