// avalon_wr_if: Avalon-MM write slave that loads the segment memory.
//
// The host writes one 36-bit word per write cycle. The address is split into the segment
// index (upper bits) and the coefficient bank (lowest BANK_W bits); the bank selects one of
// the four segment-memory banks, which is the demultiplexer drawn between the interface
// and the memory. The port names avs_write, writedata and avs_address are the paper's; the
// address split, the word width and the one-cycle registered write are this design's
// choices (the paper names the interface only). The slave never stalls, so there is no
// waitrequest, and it has no read channel.
// Timing: a write accepted at a clock edge reaches the memory bank at the next edge.
module avalon_wr_if
  import spline_pkg::*;
#(
  parameter int unsigned SEG_AW = 10   // segment index width: 2**SEG_AW segments
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     avs_write,
  input  logic [SEG_AW+BANK_W-1:0] avs_address,
  input  logic [COEF_W-1:0]        writedata,
  output logic [BANKS-1:0]         bank_we,     // one-hot write enable per bank
  output logic [SEG_AW-1:0]        wr_addr,
  output logic [COEF_W-1:0]        wr_data
);

  bank_e bank;
  assign bank = bank_e'(avs_address[BANK_W-1:0]);

  always_ff @(posedge clk) begin
    if (rst) begin
      bank_we <= '0;
      wr_addr <= '0;
      wr_data <= '0;
    end else begin
      bank_we <= '0;
      if (avs_write) begin
        bank_we[bank] <= 1'b1;
        wr_addr       <= avs_address[SEG_AW+BANK_W-1:BANK_W];
        wr_data       <= writedata;
      end
    end
  end

  // exactly one bank is written per accepted write
  a_onehot: assert property (@(posedge clk) disable iff (rst) $onehot0(bank_we));

endmodule
