// turn_store: per-stage store of the final accumulator values of forward segments,
// used to replay a mirrored pulse backwards.
//
// For a pulse that exploits symmetry, the second half replays the stored segments in
// reverse order, and the backward recursion of a segment starts from the values its
// forward recursion reached at its last sample (alpha_tf, beta_tf, gamma_tf). The paper
// says those values are generated during the forward pass rather than stored in segment
// memory; keeping one of them per segment in this small store so that every backward
// segment (not only the one at the symmetry centre) can be started is this design's choice.
// Write: when cap_en, mem[idx] <= cap_val at the clock edge.
// Read: combinational; turn_val = bypass ? cap_val : mem[idx]. The bypass serves the
// segment at the symmetry centre, whose final value is written and reloaded in the same
// cycle. The store has no reset: an entry is always written before it is read.
module turn_store
  import spline_pkg::*;
(
  input  logic    clk,
  input  logic    cap_en,
  input  symidx_t idx,
  input  coef_t   cap_val,
  input  logic    bypass,
  output coef_t   turn_val
);

  coef_t mem [SYM_DEPTH];

  always_ff @(posedge clk) begin
    if (cap_en) mem[idx] <= cap_val;
  end

  assign turn_val = bypass ? cap_val : mem[idx];

endmodule
