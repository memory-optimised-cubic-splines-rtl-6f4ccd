// amp_mixer: amplitude modulation of the carrier by the spline envelope.
//
// Multiplies the signed envelope sample by the signed carrier sample and keeps the product
// scaled back to W bits (product >> (W-1)), so a full-scale envelope passes the carrier at
// full scale. The low W-1 product bits are dropped (truncation), and the single product
// that does not fit, most-negative times most-negative, saturates to the largest positive
// value. Outside a pulse (env_valid low) the output is zero. The paper shows this
// multiplier between the pulse shaper, the NCO and the DAC; the scaling, the zeroing
// outside a pulse and the single output register are this design's choices.
// Timing: one register stage; dac_valid follows env_valid by one clock.
module amp_mixer #(
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] env,
  input  logic                env_valid,
  input  logic signed [W-1:0] carrier,
  output logic signed [W-1:0] dac_data,
  output logic                dac_valid
);

  logic signed [2*W-1:0] prod;
  logic signed [W:0]     scaled;

  assign prod   = env * carrier;
  assign scaled = prod[2*W-1 -: W+1];   // prod >> (W-1)

  always_ff @(posedge clk) begin
    if (rst) begin
      dac_data  <= '0;
      dac_valid <= 1'b0;
    end else begin
      dac_valid <= env_valid;
      if (!env_valid) dac_data <= '0;
      // the only product that needs W+1 bits is (-2**(W-1)) * (-2**(W-1)): saturate it
      else if (scaled > (W+1)'(2**(W-1) - 1)) dac_data <= W'(2**(W-1) - 1);
      else dac_data <= prod[2*W-2 -: W];
    end
  end

endmodule
