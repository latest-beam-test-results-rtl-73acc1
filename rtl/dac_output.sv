// dac_output: kick word to the DAC that drives the kicker amplifier.
//
// The feedback output is turned back into an analogue signal by a DAC
// clocked at 357/4 Ms/s and fed to the kicker drive amplifier. This block
// saturates the KICK_W-bit kick to the DAC_W-bit two's-complement DAC word
// and loads it on the converter strobe, so the word is stable for a whole
// converter period. The word is zero while feedback is off (fb_enable low)
// or outside the train window (gate low), so the amplifier is driven only
// while a train passes. Saturation, gating and the two's-complement DAC
// format are this design's choices.
//
// Timing: dac_data changes only in the tick after a strobe (asserted); a
// new kick reaches it after 1 to CLK_DIV ticks.
module dac_output
  import font4_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     strobe,
  input  logic                     fb_enable,
  input  logic                     gate,
  input  logic signed [KICK_W-1:0] kick,
  output logic signed [DAC_W-1:0]  dac_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      dac_data <= '0;
    else if (strobe) dac_data <= (fb_enable && gate) ?
                                 DAC_W'(sat_signed(48'(kick), DAC_W)) : '0;
  end

  // The DAC word may change only in the tick after a converter strobe.
  a_dac_on_strobe: assert property (@(posedge clk) disable iff (!rst_n)
    !$past(strobe) |-> $stable(dac_data));

endmodule
