// font4_pkg: widths, clock ratio and run-time configuration shared by the
// FONT4 intra-train feedback firmware.
//
// The feedback firmware runs in one clock domain, the 357 MHz clock derived
// from the accelerator master oscillator (period 2.8 ns). The ADCs and DACs
// run at a quarter of that rate, 357/4 = 89.25 Ms/s. Both of these numbers
// are the prototype's own. The data widths are this design's choice: the
// ADC and DAC parts are named only by vendor and rate, so 14-bit converters
// are assumed throughout.
package font4_pkg;

  // FPGA clock to converter clock ratio (357 MHz / 4).
  localparam int unsigned CLK_DIV     = 4;

  // Converter and datapath widths (assumed, see above).
  localparam int unsigned ADC_W       = 14;  // sum and difference samples, two's complement
  localparam int unsigned DAC_W       = 14;  // kick drive word, two's complement
  localparam int unsigned POS_W       = 14;  // normalised position, Q1.13 (+-1 = full scale)
  localparam int unsigned CORR_W      = 16;  // gain-table output, one bunch's correction
  localparam int unsigned KICK_W      = 16;  // accumulated kick held by the delay loop

  // Timing fields, counted in 357 MHz ticks.
  localparam int unsigned TICK_W      = 12;  // trigger-to-sample delay, up to 11.4 us
  localparam int unsigned SPACING_W   = 8;   // bunch spacing, up to 714 ns
  localparam int unsigned BUNCH_W     = 6;   // bunch counter, trains up to 60 bunches
  localparam int unsigned MAX_BUNCHES = 60;

  // Extra kick delay for the latency scan, in ticks.
  localparam int unsigned KDLY_W      = 5;   // 0..31 ticks, 0..86.8 ns

  // Run-time settings, written by the control host before a train.
  typedef struct packed {
    logic                 fb_enable;      // 0: DAC held at zero (feedback off)
    logic                 norm_enable;    // 1: divide by the sum signal (main mode)
    logic [BUNCH_W-1:0]   n_bunches;      // bunches in the train (3 at the test beam)
    logic [TICK_W-1:0]    first_delay;    // trigger edge to first bunch peak, ticks
    logic [SPACING_W-1:0] bunch_spacing;  // bunch spacing, ticks (154 ns = 55)
    logic [KDLY_W-1:0]    kick_delay;     // added kick delay, ticks (0 in normal use)
  } fb_cfg_t;

  // One bunch's peak sample from the two BPM processor channels.
  typedef struct packed {
    logic signed [ADC_W-1:0] sum;
    logic signed [ADC_W-1:0] diff;
  } bpm_sample_t;

  // Saturate a wide signed value to a narrower two's-complement width.
  function automatic logic signed [31:0] sat_signed(input logic signed [47:0] v,
                                                    input int unsigned w);
    logic signed [47:0] hi, lo;
    hi = (48'sd1 <<< (w - 1)) - 48'sd1;
    lo = -(48'sd1 <<< (w - 1));
    if (v > hi)      return 32'(hi);
    else if (v < lo) return 32'(lo);
    else             return 32'(v);
  endfunction

endpackage
