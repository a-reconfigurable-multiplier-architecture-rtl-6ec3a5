// rmul32 - 32x32 -> 64-bit unsigned multiplier built from four 16-bit
// reconfigurable multipliers working in parallel.
//
// The four 16-bit units form AL*BL, AL*BH, AH*BL and AH*BH of the 16-bit
// operand halves; their 32-bit products are added with shifts of 0, 16, 16
// and 32. Each unit has its own error control: er_ll for AL*BL, er_mid for
// both cross products, er_hh for AH*BH (the three Er fields of mulcsr).
// All four start together on start and finish together, so the timing is
// that of rmul16: done (and a valid p) five cycles after start.
// The structure follows the paper; the field-to-unit assignment is this
// design's reading of it.
module rmul32
  import rmul_pkg::*;
#(
  parameter mul_variant_e VARIANT = SSM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [7:0]  er_ll,
  input  logic [7:0]  er_mid,
  input  logic [7:0]  er_hh,
  output logic        busy,
  output logic        done,
  output logic [63:0] p
);
  logic [31:0] p_ll, p_lh, p_hl, p_hh;
  logic [3:0]  busy_u, done_u;

  rmul16 #(.VARIANT(VARIANT)) u_ll (.clk, .rst_n, .start, .a(a[15:0]),  .b(b[15:0]),
                                    .er(er_ll),  .busy(busy_u[0]), .done(done_u[0]), .p(p_ll));
  rmul16 #(.VARIANT(VARIANT)) u_lh (.clk, .rst_n, .start, .a(a[15:0]),  .b(b[31:16]),
                                    .er(er_mid), .busy(busy_u[1]), .done(done_u[1]), .p(p_lh));
  rmul16 #(.VARIANT(VARIANT)) u_hl (.clk, .rst_n, .start, .a(a[31:16]), .b(b[15:0]),
                                    .er(er_mid), .busy(busy_u[2]), .done(done_u[2]), .p(p_hl));
  rmul16 #(.VARIANT(VARIANT)) u_hh (.clk, .rst_n, .start, .a(a[31:16]), .b(b[31:16]),
                                    .er(er_hh),  .busy(busy_u[3]), .done(done_u[3]), .p(p_hh));

  // the four units run in lock step; unit 0 speaks for all
  assign busy = busy_u[0];
  assign done = done_u[0];

  assign p = {32'b0, p_ll}
           + {16'b0, p_lh, 16'b0}
           + {16'b0, p_hl, 16'b0}
           + {p_hh, 32'b0};

  // the units share start and reset, so they can never drift apart
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (busy_u == {4{busy_u[0]}}) && (done_u == {4{done_u[0]}}));
endmodule
