// rmul16 - 16x16 unsigned multiplier that time-shares one 8-bit
// reconfigurable multiplier over four consecutive cycles.
//
// A start pulse captures a, b and er. In the next four cycles the shared
// rmul8 forms AL*BL, AH*BL, AL*BH and AH*BH, in that order (the order of the
// paper's input-cycle table), and each 16-bit sub-product is written to its
// own register. The output adds the four registers with shifts of 0, 8, 8
// and 16 bits. done pulses for one cycle five cycles after start (1 capture
// cycle + 4 multiply cycles); p then holds its value until the next start.
// busy is high from the cycle after start until done. A start while busy is
// ignored. The same er applies to all four sub-products.
//
// Interface timing:  cycle t: start=1  ->  cycle t+5: done=1, p valid.
// The cycle order and the register/adder structure follow the paper; the
// handshake and the operand capture are this design's own.
module rmul16
  import rmul_pkg::*;
#(
  parameter mul_variant_e VARIANT = SSM
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] a,
  input  logic [15:0] b,
  input  logic [7:0]  er,
  output logic        busy,
  output logic        done,
  output logic [31:0] p
);
  logic [15:0] a_q, b_q;
  logic [7:0]  er_q;
  logic [1:0]  step_q;          // which sub-product is being formed
  logic [15:0] pp_q [4];        // sub-product registers
  logic [7:0]  m_a, m_b;
  logic [15:0] m_p;

  // operand selection per cycle: 0 AL*BL, 1 AH*BL, 2 AL*BH, 3 AH*BH
  assign m_a = step_q[0] ? a_q[15:8] : a_q[7:0];
  assign m_b = step_q[1] ? b_q[15:8] : b_q[7:0];

  rmul8 #(.VARIANT(VARIANT)) u_mul8 (.a(m_a), .b(m_b), .er(er_q), .p(m_p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q    <= '0;
      b_q    <= '0;
      er_q   <= ER_EXACT;
      step_q <= '0;
      busy   <= 1'b0;
      done   <= 1'b0;
      for (int k = 0; k < 4; k++) pp_q[k] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          a_q    <= a;
          b_q    <= b;
          er_q   <= er;
          step_q <= '0;
          busy   <= 1'b1;
        end
      end else begin
        pp_q[step_q] <= m_p;
        step_q       <= step_q + 2'd1;
        if (step_q == 2'd3) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign p = {16'b0, pp_q[0]}
           + {8'b0, pp_q[1], 8'b0}
           + {8'b0, pp_q[2], 8'b0}
           + {pp_q[3], 16'b0};
endmodule
