// nco: numerically controlled oscillator of the DDS channel.
//
// A PHASE_W-bit phase accumulator advances by freq_word every clock; the sum of the
// accumulator and phase_word, cut to its top LUT_AW bits, addresses a full-cycle sine
// table of OUT_W-bit signed samples (amplitude 2**(OUT_W-1)-1). The table is computed at
// elaboration, entry i = round(A * sin(2*pi*i / 2**LUT_AW)). The output frequency is
// f_clk * freq_word / 2**PHASE_W. The paper names the NCO and its frequency and phase
// inputs only; the phase-accumulator-plus-table structure and all widths are this
// design's choices. The accumulator is cleared by reset only, so the carrier runs freely
// and successive pulses stay phase coherent.
// Timing: two register stages (phase, then table output): a change of phase_word shows
// on sin_out two clocks later.
module nco #(
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned LUT_AW  = 10,
  parameter int unsigned OUT_W   = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [PHASE_W-1:0]       freq_word,
  input  logic [PHASE_W-1:0]       phase_word,
  output logic signed [OUT_W-1:0]  sin_out
);

  typedef logic signed [OUT_W-1:0] lut_t [2**LUT_AW];

  function automatic lut_t make_lut();
    lut_t t;
    for (int i = 0; i < 2**LUT_AW; i++)
      t[i] = OUT_W'($rtoi($floor($sin(2.0 * 3.14159265358979 * real'(i) / real'(2**LUT_AW))
                                 * real'(2**(OUT_W-1) - 1) + 0.5)));
    return t;
  endfunction

  localparam lut_t SINE = make_lut();

  logic [PHASE_W-1:0] acc, phase;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc     <= '0;
      phase   <= '0;
      sin_out <= '0;
    end else begin
      acc     <= acc + freq_word;
      phase   <= acc + phase_word;
      sin_out <= SINE[phase[PHASE_W-1 -: LUT_AW]];
    end
  end

endmodule
