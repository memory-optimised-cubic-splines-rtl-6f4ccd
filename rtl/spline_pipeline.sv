// spline_pipeline: the three staggered accumulators and the output register.
//
// Evaluates the recursion y_t = alpha_t with gamma_t = gamma_{t-1} + delta,
// beta_t = beta_{t-1} + gamma_t, alpha_t = alpha_{t-1} + beta_t (forward), and its mirror
// alpha'_t = alpha'_{t-1} - beta'_{t-1}, beta'_t = beta'_{t-1} - gamma'_{t-1},
// gamma'_t = gamma'_{t-1} - delta (backward), both from the paper. Stage 0 (sp0) holds
// gamma, stage 1 (sp1) beta, stage 2 (sp2) alpha; each stage runs one clock behind the
// previous one, as the registers sp0..sp2 in the paper's timing diagram do, so every
// adder has a single register-to-register step and one sample leaves per clock.
// The output register y takes alpha0 straight from the coefficient registers on the first
// sample of a forward segment and sp2 otherwise; on a mirrored segment it always takes
// sp2, which then steps backwards.
// Turn-around: on the last sample of a forward segment of a mirrored pulse each stage
// saves its current value (the segment's final value) in a turn_store; when the next
// segment is a backward one, each stage instead reloads that final value (OP_TURN),
// one stage per clock, which restarts the recursion from the segment end without a gap.
// Interface: ctrl0/idx0 are the stage-0 control word and turn-store index for this cycle;
// the pipeline delays them by one clock per stage. d0/g0, b1 and a2 come from coef_regs
// already staggered. y/y_valid/y_last appear three clocks after the stage-0 cycle that
// started the sample. Stage 2's one-clock-delayed copy (acc_prev) is left unconnected,
// because no later stage subtracts it; the control word's fwd and turn flags are not needed
// past stage 1.
module spline_pipeline
  import spline_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  ctrl_t   ctrl0,
  input  symidx_t idx0,
  input  coef_t   d0,
  input  coef_t   g0,
  input  coef_t   b1,
  input  coef_t   a2,
  output coef_t   y,
  output logic    y_valid,
  output logic    y_last
);

  ctrl_t   ctrl1, ctrl2;
  symidx_t idx1, idx2;

  always_ff @(posedge clk) begin
    if (rst) begin
      ctrl1 <= '0;
      ctrl2 <= '0;
      idx1  <= '0;
      idx2  <= '0;
    end else begin
      ctrl1 <= ctrl0;
      ctrl2 <= ctrl1;
      idx1  <= idx0;
      idx2  <= idx1;
    end
  end

  coef_t sp0, sp1, sp2, sp0_prev, sp1_prev;
  coef_t cap0, cap1, cap2, turn0, turn1, turn2;

  // final value of the segment ending in this slot: the accumulator, or the coefficient
  // itself for a one-sample segment
  assign cap0 = ctrl0.first ? g0 : sp0;
  assign cap1 = ctrl1.first ? b1 : sp1;
  assign cap2 = ctrl2.first ? a2 : sp2;

  turn_store u_store0 (.clk, .cap_en(ctrl0.cap), .idx(idx0), .cap_val(cap0),
                       .bypass(ctrl0.bypass), .turn_val(turn0));
  turn_store u_store1 (.clk, .cap_en(ctrl1.cap), .idx(idx1), .cap_val(cap1),
                       .bypass(ctrl1.bypass), .turn_val(turn1));
  turn_store u_store2 (.clk, .cap_en(ctrl2.cap), .idx(idx2), .cap_val(cap2),
                       .bypass(ctrl2.bypass), .turn_val(turn2));

  spline_acc u_acc0 (.clk, .rst, .op(ctrl0.op), .coef(g0), .addend(d0), .sub_in(d0),
                     .turn_val(turn0), .acc(sp0), .acc_prev(sp0_prev));
  spline_acc u_acc1 (.clk, .rst, .op(ctrl1.op), .coef(b1), .addend(sp0), .sub_in(sp0_prev),
                     .turn_val(turn1), .acc(sp1), .acc_prev(sp1_prev));
  spline_acc u_acc2 (.clk, .rst, .op(ctrl2.op), .coef(a2), .addend(sp1), .sub_in(sp1_prev),
                     .turn_val(turn2), .acc(sp2), .acc_prev());

  // output register ("Reg" before pulse_out)
  always_ff @(posedge clk) begin
    if (rst) begin
      y       <= '0;
      y_valid <= 1'b0;
      y_last  <= 1'b0;
    end else begin
      y_valid <= ctrl2.valid;
      y_last  <= ctrl2.valid & ctrl2.last;
      if (ctrl2.valid) y <= ctrl2.first ? a2 : sp2;
    end
  end

endmodule
