// pulse_shaper: cubic-spline envelope generator (the pulse shaper of the DDS channel).
//
// A pulse envelope is stored as a list of cubic segments, each given by four initial
// coefficients of the additive recursion (alpha0, beta0, gamma0, delta0) and a length in
// samples. On start_pulse the shaper plays seg_num segments from start_addr and produces
// one 16-bit sample per clock on pulse_out, with pulse_valid high for every sample and no
// gap between segments. With pulse_sym set the stored segments are played forwards and
// then backwards, so a pulse symmetric about its centre needs only its first half stored.
// Structure, as in the paper's block diagram: Avalon write interface -> segment memory ->
// coefficient registers -> three accumulators -> output register, with a control FSM. The
// ports clk, rst, avs_write, writedata, avs_address, start_pulse, start_addr, seg_num,
// pulse_out, pulse_running, pulse_valid and pulse_done are the paper's names; pulse_sym
// (select the mirrored mode) is this design's addition, as are the widths of start_addr
// and seg_num and the exact meaning of the status outputs:
//   pulse_running  high from the clock after start is accepted to the last sample
//   pulse_valid    high while pulse_out holds a sample
//   pulse_done     high together with the last sample of the pulse
// Timing: if start_pulse is sampled high at edge 0, the first sample is on pulse_out
// after edge 3; a pulse of L samples ends with its last sample after edge L+2.
// pulse_out is the top 16 bits (sign and integer part) of the 36-bit alpha accumulator,
// truncated, as the paper does. Coefficients may be written at any time; writing the
// segments of a pulse that is playing gives undefined samples.
module pulse_shaper
  import spline_pkg::*;
#(
  parameter int unsigned SEG_AW = 10
) (
  input  logic                     clk,
  input  logic                     rst,
  // Avalon-MM write port
  input  logic                     avs_write,
  input  logic [COEF_W-1:0]        writedata,
  input  logic [SEG_AW+BANK_W-1:0] avs_address,
  // pulse control
  input  logic                     start_pulse,
  input  logic [SEG_AW-1:0]        start_addr,
  input  logic [SEG_AW:0]          seg_num,
  input  logic                     pulse_sym,
  // envelope output
  output sample_t                  pulse_out,
  output logic                     pulse_running,
  output logic                     pulse_valid,
  output logic                     pulse_done
);

  logic [BANKS-1:0]  bank_we;
  logic [SEG_AW-1:0] wr_addr, rd_addr;
  logic [COEF_W-1:0] wr_data;
  logic              rd_en, started, busy;
  segment_t          seg;
  ctrl_t             ctrl0;
  symidx_t           idx0;
  coef_t             d0, g0, b1, a2, y;
  logic              y_valid, y_last;

  avalon_wr_if #(.SEG_AW(SEG_AW)) u_avalon (
    .clk, .rst, .avs_write, .avs_address, .writedata,
    .bank_we, .wr_addr, .wr_data);

  seg_memory #(.SEG_AW(SEG_AW)) u_mem (
    .clk, .bank_we, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_seg(seg));

  spline_ctrl #(.SEG_AW(SEG_AW)) u_ctrl (
    .clk, .rst, .start_pulse, .start_addr, .seg_num, .pulse_sym,
    .accept_ok(!pulse_running), .started, .busy,
    .rd_en, .rd_addr, .mem_len(seg.len), .ctrl0, .idx0);

  coef_regs u_regs (
    .clk, .rst, .seg, .op0(ctrl0.op), .keep_d(ctrl0.bypass), .d0, .g0, .b1, .a2);

  spline_pipeline u_pipe (
    .clk, .rst, .ctrl0, .idx0, .d0, .g0, .b1, .a2, .y, .y_valid, .y_last);

  assign pulse_out   = y[COEF_W-1 -: OUT_W];
  assign pulse_valid = y_valid;
  assign pulse_done  = y_valid & y_last;

  always_ff @(posedge clk) begin
    if (rst)             pulse_running <= 1'b0;
    else if (started)    pulse_running <= 1'b1;
    else if (pulse_done) pulse_running <= 1'b0;
  end

  // the controller only runs inside a pulse
  a_busy: assert property (@(posedge clk) disable iff (rst) busy |-> pulse_running);

endmodule
