// spline_pkg: widths, types and constants shared by the cubic-spline pulse shaper.
//
// The envelope generator evaluates a cubic polynomial per segment with three chained
// accumulators (the "Bowler" recursion). All coefficients and accumulators are signed
// fixed point, COEF_W = 36 bits with FRAC_W = 20 fractional bits, and the output sample
// keeps only the top OUT_W = 16 bits (sign + 15 integer bits); these three numbers follow
// the paper. The first coefficient alpha0 is a plain 16-bit integer sample, as the paper
// notes, so its memory word has 20 spare bits; this design uses them for the segment
// length in samples (its own choice: the paper does not say where segment lengths live).
//
// Memory map of the Avalon write port (this design's choice): avs_address =
// {segment index, bank}, with bank 0 = {length, alpha0}, 1 = beta0, 2 = gamma0, 3 = delta0.
package spline_pkg;

  localparam int unsigned COEF_W   = 36;  // coefficient / accumulator width
  localparam int unsigned FRAC_W   = 20;  // fractional bits
  localparam int unsigned OUT_W    = 16;  // output sample width (DAC resolution)
  localparam int unsigned ALPHA_W  = 16;  // stored alpha0 width (integer sample)
  localparam int unsigned LEN_W    = COEF_W - ALPHA_W;  // segment length field, 20 bits
  localparam int unsigned BANKS    = 4;
  localparam int unsigned BANK_W   = 2;
  // Depth of the turn-around store used by mirrored pulses (this design's choice):
  // a mirrored pulse may have at most SYM_DEPTH stored segments.
  localparam int unsigned SYM_IDX_W = 6;
  localparam int unsigned SYM_DEPTH = 2**SYM_IDX_W;

  typedef logic signed [COEF_W-1:0] coef_t;
  typedef logic signed [OUT_W-1:0]  sample_t;
  typedef logic [LEN_W-1:0]         seglen_t;
  typedef logic [SYM_IDX_W-1:0]     symidx_t;

  typedef enum logic [BANK_W-1:0] {
    BANK_ALPHA = 2'd0,   // {length, alpha0}
    BANK_BETA  = 2'd1,
    BANK_GAMMA = 2'd2,
    BANK_DELTA = 2'd3
  } bank_e;

  // One segment as held in memory: the initial coefficients of Eq. (4) of the recursion
  // plus the number of output samples the segment lasts.
  typedef struct packed {
    seglen_t                   len;
    logic signed [ALPHA_W-1:0] alpha;
    coef_t                     beta;
    coef_t                     gamma;
    coef_t                     delta;
  } segment_t;

  // Operation of one accumulator stage in one clock cycle.
  //   OP_IDLE : hold
  //   OP_LOAD : first sample of a forward segment: acc <= coefficient + addend
  //   OP_ADD  : forward step:                      acc <= acc + addend
  //   OP_SUB  : backward (mirrored) step:          acc <= acc - previous addend
  //   OP_TURN : load the final value of the segment to be replayed backwards
  typedef enum logic [2:0] {
    OP_IDLE = 3'd0,
    OP_LOAD = 3'd1,
    OP_ADD  = 3'd2,
    OP_SUB  = 3'd3,
    OP_TURN = 3'd4
  } acc_op_e;

  // Control word issued by the controller for stage 0 and passed down the stages,
  // one cycle later per stage.
  typedef struct packed {
    logic    valid;    // this slot produces an output sample (at the output register)
    logic    fwd;      // the sample belongs to a forward segment
    logic    first;    // slot 0 of a forward segment (y takes alpha0 directly)
    logic    cap;      // last slot of a forward segment of a mirrored pulse: save final value
    logic    turn;     // this slot loads the final values of the next (backward) segment
    logic    bypass;   // the next backward segment is the one that ends right here
    logic    last;     // final sample of the pulse
    acc_op_e op;
  } ctrl_t;

  function automatic coef_t alpha_to_coef(input logic signed [ALPHA_W-1:0] a);
    return coef_t'({a, {FRAC_W{1'b0}}});
  endfunction

endpackage
