// adc_capture: peak-sample capture from the two BPM processor channels.
//
// The board has two analogue inputs, here the sum and the difference signal
// of the BPM front-end processor, digitised at 357/4 Ms/s. On each converter
// strobe the ADC words are registered; when the timing controller marks a
// bunch's peak (sample_pulse), the most recent registered pair is latched and
// presented with valid for one tick, together with the bunch number.
// Sampling at the peak follows the prototype; taking the most recent ADC word
// at the programmed tick is this design's choice.
//
// Timing: out_valid is high one tick after sample_pulse.
module adc_capture
  import font4_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    strobe,        // converter sample strobe
  input  logic signed [ADC_W-1:0] adc_sum,       // ADC channel A: sum signal
  input  logic signed [ADC_W-1:0] adc_diff,      // ADC channel B: difference signal
  input  logic                    sample_pulse,
  input  logic [BUNCH_W-1:0]      bunch_idx_in,
  output logic                    out_valid,
  output bpm_sample_t             out_sample,
  output logic [BUNCH_W-1:0]      out_bunch
);

  bpm_sample_t adc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      adc_q      <= '0;
      out_valid  <= 1'b0;
      out_sample <= '0;
      out_bunch  <= '0;
    end else begin
      if (strobe) begin
        adc_q.sum  <= adc_sum;
        adc_q.diff <= adc_diff;
      end
      out_valid <= sample_pulse;
      if (sample_pulse) begin
        out_sample <= adc_q;
        out_bunch  <= bunch_idx_in;
      end
    end
  end

endmodule
