// bunch_timing: pre-beam trigger handling and per-bunch peak-sample timing.
//
// All feedback processing is started by a pre-beam trigger, and the BPM
// processor output is sampled at the peak of each bunch's pulse. The trigger
// input (asynchronous, from an external connector) passes a two-flop
// synchroniser; its rising edge starts a train. From then a tick counter runs
// and sample_pulse fires for one tick at
//     first_delay + k * bunch_spacing,   k = 0 .. n_bunches-1
// with bunch_idx = k. The prototype runs 3-bunch trains at 140-154 ns spacing
// (50-55 ticks at 357 MHz) and is meant to take 20 or 60 bunches later.
//
// train_active marks the window in which the kick may be driven: it rises
// with train_start and falls one bunch spacing after the last sample, which
// covers the passage of the last bunch. A new trigger during a train restarts
// it. Trigger synchronisation, the window and the restart rule are this
// design's choices; the paper only says that a pre-beam signal triggers the
// logic and that sampling is at the peak.
//
// Timing: the trigger reaches trig_edge two ticks after it is sampled;
// train_start is high in the next tick, with the tick counter at 0. The
// sample_pulse of bunch k is registered, so it is high exactly
// first_delay + k*bunch_spacing + 1 ticks after train_start. An assertion
// checks that sample pulses fall inside the kick window.
module bunch_timing
  import font4_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 trig_in,        // pre-beam trigger, asynchronous
  input  logic [BUNCH_W-1:0]   n_bunches,
  input  logic [TICK_W-1:0]    first_delay,
  input  logic [SPACING_W-1:0] bunch_spacing,
  output logic                 train_start,    // one tick, clears the delay loop
  output logic                 train_active,
  output logic                 sample_pulse,   // one tick per bunch, at the peak
  output logic [BUNCH_W-1:0]   bunch_idx
);

  logic [2:0]         trig_sync;     // two synchroniser flops and the edge reference
  logic               trig_edge;
  logic [TICK_W:0]    tick;          // one bit wider than the delay fields
  logic [TICK_W:0]    next_sample;
  logic [BUNCH_W-1:0] idx;
  logic               sampling;      // bunches still to sample
  logic               window;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) trig_sync <= '0;
    else        trig_sync <= {trig_sync[1:0], trig_in};
  end
  assign trig_edge = trig_sync[1] & ~trig_sync[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      train_start  <= 1'b0;
      tick         <= '0;
      next_sample  <= '0;
      idx          <= '0;
      sampling     <= 1'b0;
      window       <= 1'b0;
      sample_pulse <= 1'b0;
      bunch_idx    <= '0;
    end else begin
      train_start  <= trig_edge;
      sample_pulse <= 1'b0;
      if (trig_edge) begin
        tick        <= '0;
        next_sample <= {1'b0, first_delay};
        idx         <= '0;
        sampling    <= (n_bunches != '0);
        window      <= (n_bunches != '0);
      end else if (window) begin
        tick <= tick + 1'b1;
        if (sampling && tick == next_sample) begin
          sample_pulse <= 1'b1;
          bunch_idx    <= idx;
          idx          <= idx + 1'b1;
          next_sample  <= next_sample + (TICK_W+1)'(bunch_spacing);
          if (idx == n_bunches - 1'b1) sampling <= 1'b0;
        end else if (!sampling && tick == next_sample) begin
          // next_sample now points one spacing past the last bunch
          window <= 1'b0;
        end
      end
    end
  end

  assign train_active = window;

  // Sample pulses only come inside the kick window.
  a_sample_in_window: assert property (@(posedge clk) disable iff (!rst_n)
    sample_pulse |-> train_active);

endmodule
