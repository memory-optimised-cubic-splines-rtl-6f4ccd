// dds_top: digital part of a direct-digital-synthesis channel with a cubic-spline envelope.
//
// The pulse shaper rebuilds the pulse envelope, one sample per clock, from cubic-spline
// segments held in its segment memory; the NCO generates the carrier from a frequency and
// a phase word; the multiplier modulates the carrier's amplitude with the envelope, and
// the product goes to the RF DAC (dac_data), which with the analog chain behind it lies
// outside this design. This is the chain of the paper's DDS diagram; the envelope
// generator follows the paper in detail, the NCO and the multiplier are plain
// implementations of their textbook function.
// Interface: the Avalon write port and the pulse controls of pulse_shaper; freq_word and
// phase_word of the NCO; the envelope and its status flags as well as the DAC sample bus.
// Timing: the envelope sample on pulse_out leaves on dac_data one clock later. The NCO is
// two clocks deep and free running; its samples are combined with whichever envelope
// sample is current.
module dds_top
  import spline_pkg::*;
#(
  parameter int unsigned SEG_AW  = 10,
  parameter int unsigned PHASE_W = 32
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     avs_write,
  input  logic [COEF_W-1:0]        writedata,
  input  logic [SEG_AW+BANK_W-1:0] avs_address,
  input  logic                     start_pulse,
  input  logic [SEG_AW-1:0]        start_addr,
  input  logic [SEG_AW:0]          seg_num,
  input  logic                     pulse_sym,
  input  logic [PHASE_W-1:0]       freq_word,
  input  logic [PHASE_W-1:0]       phase_word,
  output sample_t                  pulse_out,
  output logic                     pulse_running,
  output logic                     pulse_valid,
  output logic                     pulse_done,
  output sample_t                  dac_data,
  output logic                     dac_valid
);

  sample_t carrier;

  pulse_shaper #(.SEG_AW(SEG_AW)) u_shaper (
    .clk, .rst, .avs_write, .writedata, .avs_address,
    .start_pulse, .start_addr, .seg_num, .pulse_sym,
    .pulse_out, .pulse_running, .pulse_valid, .pulse_done);

  nco #(.PHASE_W(PHASE_W), .LUT_AW(10), .OUT_W(OUT_W)) u_nco (
    .clk, .rst, .freq_word, .phase_word, .sin_out(carrier));

  amp_mixer #(.W(OUT_W)) u_mix (
    .clk, .rst, .env(pulse_out), .env_valid(pulse_valid), .carrier,
    .dac_data, .dac_valid);

endmodule
