// spline_acc: one accumulator of the recursive cubic-polynomial evaluator.
//
// The pulse shaper evaluates a cubic per segment with three of these in a chain
// (gamma, beta, alpha). Each cycle the accumulator does what its operation code says:
//   OP_LOAD  acc <= coef + addend      first step of a forward segment
//   OP_ADD   acc <= acc + addend       forward recursion step, Eq. (3) of the recursion
//   OP_SUB   acc <= acc - sub_in       backward (time-reversed) step of a mirrored pulse
//   OP_TURN  acc <= turn_val           reload the final value of the segment replayed next
//   OP_IDLE  acc holds
// The forward and backward update rules are the paper's; splitting them into these
// operation codes, and the TURN reload, are this design's way of driving them.
// acc_prev is acc delayed by one clock: in backward mode the next stage subtracts the value
// this stage held one step earlier (beta'_t = beta'_{t-1} - gamma'_{t-1}).
// Timing: registered, one update per clock, no combinational path from inputs to outputs.
// Reset (synchronous, active high) clears both registers. Arithmetic wraps at COEF_W bits,
// as a fixed-width hardware adder does.
module spline_acc
  import spline_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  acc_op_e op,
  input  coef_t   coef,      // initial coefficient of the segment (OP_LOAD)
  input  coef_t   addend,    // forward addend (the preceding stage, or delta for stage 0)
  input  coef_t   sub_in,    // backward subtrahend (the preceding stage one step earlier)
  input  coef_t   turn_val,  // value loaded on OP_TURN
  output coef_t   acc,
  output coef_t   acc_prev
);

  coef_t acc_next;

  always_comb begin
    unique case (op)
      OP_LOAD: acc_next = coef + addend;
      OP_ADD:  acc_next = acc + addend;
      OP_SUB:  acc_next = acc - sub_in;
      OP_TURN: acc_next = turn_val;
      default: acc_next = acc;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      acc      <= '0;
      acc_prev <= '0;
    end else begin
      acc      <= acc_next;
      acc_prev <= acc;
    end
  end

endmodule
