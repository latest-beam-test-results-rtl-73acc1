// font4_fb_top: FPGA firmware of the FONT4 intra-train beam feedback.
//
// One BPM measures the vertical position of each bunch of a train; a
// stripline kicker upstream of it steers the following bunches. This module
// is the digital processor between the two: it samples the BPM front-end's
// sum and difference signals at each bunch's peak, normalises the
// difference by the sum (charge normalisation), maps the result to a
// correction through a gain table, adds the correction to the held kick
// (the delay loop, an accumulator) and writes the kick to the DAC that
// drives the kicker amplifier. The measured bunch n thus sets the kick seen
// by bunch n+1 and, through the accumulator, by all later bunches.
//
//   trig_in -> bunch_timing -> sample_pulse
//   adc_sum/adc_diff -> adc_capture -> charge_normaliser -> gain_lut
//       -> delay_loop_acc -> kick_delay -> dac_output -> dac_data
//   sample_clock_gen: converter clock (357/4 Ms/s) and sample strobe
//
// Everything runs on one clock, clk = 357 MHz, locked to the beam. The
// converter clock is produced here and sent to the ADCs and DAC
// (adc_clk, dac_clk). Settings come in as one fb_cfg_t word, the gain table
// through its write port; both belong to a control host outside this module.
// cfg must be held stable while a train is in progress (asserted).
//
// The accumulator is held clear outside the train window, so no kick from
// an earlier train can reach the DAC when the next window opens.
//
// Latency, in 357 MHz ticks from sample_pulse to the new kick word at the
// kick_delay output: 1 (capture) + 3 (normalisation, 0 when bypassed)
// + 1 (gain table) + 1 (accumulator) + cfg.kick_delay, then 1 to 4 ticks to
// the next DAC update. The 3-tick normalisation cost is the prototype's
// figure; the other stage boundaries are this design's choices.
module font4_fb_top
  import font4_pkg::*;
#(
  parameter int unsigned RA_W = 10,  // reciprocal table address bits
  parameter int unsigned GA_W = 10   // gain table address bits
) (
  input  logic                     clk,          // 357 MHz, beam-locked
  input  logic                     rst_n,
  input  logic                     trig_in,      // pre-beam trigger
  input  fb_cfg_t                  cfg,
  // gain table load port
  input  logic                     gain_wr_en,
  input  logic [GA_W-1:0]          gain_wr_addr,
  input  logic signed [CORR_W-1:0] gain_wr_data,
  // ADCs: sum and difference of the BPM front-end processor
  output logic                     adc_clk,
  input  logic signed [ADC_W-1:0]  adc_sum,
  input  logic signed [ADC_W-1:0]  adc_diff,
  // DAC to the kicker amplifier
  output logic                     dac_clk,
  output logic signed [DAC_W-1:0]  dac_data,
  // monitoring
  output logic                     train_active,
  output logic                     bunch_sampled,   // one tick per bunch
  output logic [BUNCH_W-1:0]       bunch_idx,
  output logic                     pos_valid,       // normalised position ready
  output logic signed [POS_W-1:0]  pos,
  output logic                     kick_valid,      // accumulator updated
  output logic signed [KICK_W-1:0] kick
);

  logic conv_clk, strobe;
  logic train_start, sample_pulse;
  logic [BUNCH_W-1:0] sample_idx;

  logic               cap_valid;
  bpm_sample_t        cap_sample;
  logic [BUNCH_W-1:0] cap_bunch;

  logic                     corr_valid;
  logic signed [CORR_W-1:0] corr;
  logic signed [KICK_W-1:0] kick_dly;

  sample_clock_gen u_clk (
    .clk, .rst_n, .conv_clk, .strobe
  );

  bunch_timing u_timing (
    .clk, .rst_n, .trig_in,
    .n_bunches     (cfg.n_bunches),
    .first_delay   (cfg.first_delay),
    .bunch_spacing (cfg.bunch_spacing),
    .train_start,
    .train_active,
    .sample_pulse,
    .bunch_idx     (sample_idx)
  );

  adc_capture u_capture (
    .clk, .rst_n, .strobe, .adc_sum, .adc_diff,
    .sample_pulse,
    .bunch_idx_in (sample_idx),
    .out_valid    (cap_valid),
    .out_sample   (cap_sample),
    .out_bunch    (cap_bunch)
  );

  charge_normaliser #(.RA_W(RA_W)) u_norm (
    .clk, .rst_n,
    .norm_enable (cfg.norm_enable),
    .in_valid    (cap_valid),
    .in_sample   (cap_sample),
    .out_valid   (pos_valid),
    .out_pos     (pos)
  );

  gain_lut #(.GA_W(GA_W)) u_gain (
    .clk, .rst_n,
    .wr_en     (gain_wr_en),
    .wr_addr   (gain_wr_addr),
    .wr_data   (gain_wr_data),
    .in_valid  (pos_valid),
    .in_pos    (pos),
    .out_valid (corr_valid),
    .out_corr  (corr)
  );

  delay_loop_acc u_acc (
    .clk, .rst_n,
    .clear     (train_start | ~train_active),
    .in_valid  (corr_valid),
    .in_corr   (corr),
    .out_valid (kick_valid),
    .kick
  );

  kick_delay u_kdly (
    .clk, .rst_n,
    .delay    (cfg.kick_delay),
    .kick_in  (kick),
    .kick_out (kick_dly)
  );

  dac_output u_dac (
    .clk, .rst_n, .strobe,
    .fb_enable (cfg.fb_enable),
    .gate      (train_active),
    .kick      (kick_dly),
    .dac_data
  );

  // Settings must not change while a train is in progress.
  a_cfg_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (train_active && $past(train_active)) |-> $stable(cfg));

  assign adc_clk       = conv_clk;
  assign dac_clk       = conv_clk;
  assign bunch_sampled = cap_valid;
  assign bunch_idx     = cap_bunch;

endmodule
