// seg_memory: segment memory holding the initial coefficients of every spline segment.
//
// Four banks of 2**SEG_AW words of 36 bits, one per coefficient, as the paper maps the
// memory onto four block RAMs: bank 0 holds {length, alpha0} (alpha0 needs only 16 bits,
// the 20 spare bits hold the segment length in samples, this design's choice), banks 1..3
// hold beta0, gamma0 and delta0. Each bank has its own write enable and they share the
// write address and data. One read port reads all four banks at once and returns the
// whole segment as a segment_t.
// Timing: synchronous read, as a block RAM with an output register: rd_en at edge k gives
// rd_seg from edge k on; rd_seg holds its value while rd_en is low. The depth
// (1024 segments) is assumed from four 36-bit block RAMs of 1K words each.
module seg_memory
  import spline_pkg::*;
#(
  parameter int unsigned SEG_AW = 10
) (
  input  logic              clk,
  input  logic [BANKS-1:0]  bank_we,
  input  logic [SEG_AW-1:0] wr_addr,
  input  logic [COEF_W-1:0] wr_data,
  input  logic              rd_en,
  input  logic [SEG_AW-1:0] rd_addr,
  output segment_t          rd_seg
);

  localparam int unsigned DEPTH = 2**SEG_AW;

  logic [COEF_W-1:0] bank_a [DEPTH];
  logic [COEF_W-1:0] bank_b [DEPTH];
  logic [COEF_W-1:0] bank_g [DEPTH];
  logic [COEF_W-1:0] bank_d [DEPTH];

  always_ff @(posedge clk) begin
    if (bank_we[BANK_ALPHA]) bank_a[wr_addr] <= wr_data;
    if (bank_we[BANK_BETA])  bank_b[wr_addr] <= wr_data;
    if (bank_we[BANK_GAMMA]) bank_g[wr_addr] <= wr_data;
    if (bank_we[BANK_DELTA]) bank_d[wr_addr] <= wr_data;
  end

  logic [COEF_W-1:0] rd_a, rd_b, rd_g, rd_d;

  always_ff @(posedge clk) begin
    if (rd_en) begin
      rd_a <= bank_a[rd_addr];
      rd_b <= bank_b[rd_addr];
      rd_g <= bank_g[rd_addr];
      rd_d <= bank_d[rd_addr];
    end
  end

  assign rd_seg.len   = rd_a[COEF_W-1:ALPHA_W];
  assign rd_seg.alpha = rd_a[ALPHA_W-1:0];
  assign rd_seg.beta  = rd_b;
  assign rd_seg.gamma = rd_g;
  assign rd_seg.delta = rd_d;

endmodule
