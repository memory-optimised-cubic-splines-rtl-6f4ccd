// coef_regs: coefficient registers between the segment memory and the accumulators.
//
// The three accumulators are staggered one clock apart (gamma, then beta, then alpha), so
// the coefficients of a new segment must reach them one clock apart too: delta and gamma0
// at the load cycle of stage 0, beta0 one cycle later, alpha0 two cycles later. This
// follows the staggered loading drawn in the paper's timing diagram (rows d0, g0, b0, a0).
// delta is also kept in d_reg for the whole segment, because stage 0 adds (forward) or
// subtracts (backward) it on every step; it is reloaded when stage 0 loads a forward
// segment or turns to a backward one (at the symmetry centre, where the backward
// segment is the one just played, it is kept). At a forward load stage 0 uses the memory word
// directly.
// Interface: seg is the segment memory output, valid during the stage-0 load cycle; op0 is
// the operation of stage 0 in that cycle, keep_d marks the turn at the centre. Outputs: d0 and g0 for stage 0 (this cycle),
// b1 for stage 1 (one cycle later), a2 for stage 2 and the output register (two later).
// g0 is the memory's gamma0 word passed straight on, because the memory output register
// already holds it in the load cycle. The 20 fraction bits of a2 are always zero, because
// alpha0 is stored as a 16-bit integer sample. The length field of seg is not used here;
// the controller takes it.
module coef_regs
  import spline_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  segment_t seg,
  input  acc_op_e  op0,
  input  logic     keep_d,   // turn at the symmetry centre: delta stays the same
  output coef_t    d0,
  output coef_t    g0,
  output coef_t    b1,
  output coef_t    a2
);

  coef_t d_reg, a1;

  always_ff @(posedge clk) begin
    if (rst) begin
      d_reg <= '0;
      b1    <= '0;
      a1    <= '0;
      a2    <= '0;
    end else begin
      if (op0 == OP_LOAD || (op0 == OP_TURN && !keep_d)) d_reg <= seg.delta;
      b1 <= seg.beta;
      a1 <= alpha_to_coef(seg.alpha);
      a2 <= a1;
    end
  end

  assign d0 = (op0 == OP_LOAD) ? seg.delta : d_reg;
  assign g0 = seg.gamma;

endmodule
