// sample_clock_gen: converter clock and sample strobe from the 357 MHz clock.
//
// The ADCs and DACs of the feedback board are clocked at 357/4 Ms/s. This
// divider counts the FPGA clock modulo DIV and produces
//   conv_clk - the converter clock, high for the first half of each period,
//   strobe   - a one-tick pulse in the last tick of each period, the tick in
//              which the firmware takes a new ADC word and may change the
//              DAC word (the converter's rising edge follows it).
// The division ratio follows the prototype; the phase and the strobe
// position are this design's choice. Reset puts the counter at phase 0.
module sample_clock_gen
  import font4_pkg::*;
#(
  parameter int unsigned DIV = CLK_DIV
) (
  input  logic clk,
  input  logic rst_n,
  output logic conv_clk,
  output logic strobe
);

  localparam int unsigned CW = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      phase <= '0;
    else if (phase == CW'(DIV - 1))  phase <= '0;
    else                             phase <= phase + 1'b1;
  end

  always_comb begin
    conv_clk = (phase < CW'(DIV / 2));
    strobe   = (phase == CW'(DIV - 1));
  end

endmodule
