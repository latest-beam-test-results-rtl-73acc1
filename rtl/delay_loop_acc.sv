// delay_loop_acc: the feedback delay loop, built as an accumulator.
//
// In the analogue FONT systems the kick for a bunch is the sum of the newly
// measured correction and the previous kick fed back through a delay line,
// so a correction, once found, is held for the rest of the train. The
// prototype firmware does this with an accumulator:
//     kick(n) = kick(n-1) + corr(n)
// The accumulator is cleared at the start of each train (and, in this
// design, whenever no train is in progress) and saturates at
// the ends of its KICK_W-bit range instead of wrapping. Clear-on-trigger and
// saturation are this design's choices.
//
// Timing: out_valid and a new kick appear one tick after in_valid; kick
// holds its value in between. clear wins over in_valid in the same tick.
module delay_loop_acc
  import font4_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,      // train start or no train
  input  logic                     in_valid,
  input  logic signed [CORR_W-1:0] in_corr,
  output logic                     out_valid,
  output logic signed [KICK_W-1:0] kick
);

  logic signed [KICK_W:0] sum;
  assign sum = (KICK_W+1)'(kick) + (KICK_W+1)'(in_corr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kick      <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid & ~clear;
      if (clear)         kick <= '0;
      else if (in_valid) kick <= KICK_W'(sat_signed(48'(sum), KICK_W));
    end
  end

endmodule
