// tb_font4_latency_scan: the latency measurement of the prototype, replayed
// on the RTL at its default parameters.
//
// The kick to bunch 2 is delayed on purpose by 0..31 ticks (kick_delay)
// and the largest added delay at which bunch 2 is still corrected is
// found; that delay is the timing slack of the loop. The scan is run with
// charge normalisation bypassed (the firmware used for the measurement)
// and with it enabled. Checked: bunch 2 is corrected for every delay up to
// the slack and for none beyond it, bunch 3 receives the correction of
// bunch 1 and, if in time, that of bunch 2, and
// enabling normalisation reduces the slack by exactly 3 ticks (8.4 ns).
//
// The beam model is the one of tb_font4_fb_top: 3-bunch trains at 154 ns
// (55 ticks), a matched gain table, and an analogue loop delay ALAT chosen
// so that the bypassed slack is close to the 22 ns of the measurement. The
// absolute slack therefore follows from that choice; the 3-tick step does
// not. Triggers are given at a fixed converter-clock phase so the DAC
// update grid is the same in every train.
module tb_font4_latency_scan;
  import font4_pkg::*;

  localparam int GA_W   = 10;
  localparam int ALAT   = 33;
  localparam int Q      = 4000;
  localparam int FD     = 120;
  localparam int SP     = 55;

  logic clk = 1'b0, rst_n = 1'b1, trig_in = 1'b0;
  fb_cfg_t cfg;
  logic gain_wr_en = 1'b0;
  logic [GA_W-1:0] gain_wr_addr = '0;
  logic signed [CORR_W-1:0] gain_wr_data = '0;
  logic adc_clk, dac_clk;
  logic signed [ADC_W-1:0] adc_sum = '0, adc_diff = '0;
  logic signed [DAC_W-1:0] dac_data;
  logic train_active, bunch_sampled, pos_valid, kick_valid;
  logic [BUNCH_W-1:0] bunch_idx;
  logic signed [POS_W-1:0] pos;
  logic signed [KICK_W-1:0] kick;
  int checks = 0, failures = 0;

  font4_fb_top dut (.*);

  always #1.4 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tick = 0;
  logic signed [DAC_W-1:0] dac_hist [4096];
  always @(posedge clk) begin
    tick <= tick + 1;
    dac_hist[tick % 4096] <= dac_data;
  end

  function automatic bit near(input real a, input real b, input real tol);
    return (a - b < tol) && (b - a < tol);
  endfunction

  task automatic load_gain(input bit norm);
    real scale, p;
    scale = norm ? 1.0 : 8192.0 / real'(Q);
    for (int i = 0; i < 2**GA_W; i++) begin
      p = real'(signed'(GA_W'(i))) * 16.0 + 8.0;
      @(negedge clk);
      gain_wr_en = 1'b1; gain_wr_addr = GA_W'(i); gain_wr_data = CORR_W'($rtoi(-scale * p));
    end
    @(negedge clk) gain_wr_en = 1'b0;
  endtask

  task automatic run_train(input bit norm, input int kdly, output real u_out [3]);
    int t_trig, arr;
    real u;
    cfg.fb_enable = 1'b1; cfg.norm_enable = norm; cfg.n_bunches = BUNCH_W'(3);
    cfg.first_delay = TICK_W'(FD); cfg.bunch_spacing = SPACING_W'(SP);
    cfg.kick_delay = KDLY_W'(kdly);
    @(posedge adc_clk);
    @(negedge clk);
    trig_in = 1'b1;
    t_trig = tick;
    for (int k = 0; k < 3; k++) begin
      arr = t_trig + 3 + FD + k * SP - 6;
      while (tick < arr) @(negedge clk);
      if (k == 0) trig_in = 1'b0;
      u = 1500.0 + real'(dac_hist[(arr - ALAT) % 4096]);
      u_out[k] = u;
      adc_sum  = ADC_W'(Q);
      adc_diff = ADC_W'($rtoi(real'(Q) * u / 8192.0));
    end
    while (train_active || tick < arr + 20) @(negedge clk);
    adc_sum = '0; adc_diff = '0;
    repeat (20) @(negedge clk);
  endtask

  initial begin
    real u[3];
    int slack [2];
    bit kicked;
    cfg = '0;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (ALAT + 10) @(negedge clk);
    for (int m = 0; m < 2; m++) begin
      load_gain(m[0]);
      slack[m] = -1;
      for (int d = 0; d < 2**KDLY_W; d++) begin
        run_train(m[0], d, u);
        kicked = near(u[1], 0.0, 40.0);
        check(kicked || near(u[1], 1500.0, 1.0), "bunch 2 fully kicked or not at all");
        // bunch 3 always gets the correction from bunch 1. A bunch 2 that
        // missed its kick was measured at the full offset and adds a second
        // correction, which reaches bunch 3 only if it is in time: the DAC
        // update grid (4 ticks) falls differently for each bunch since 55
        // is not a multiple of 4, so near the slack either can happen.
        if (kicked) check(near(u[2], 0.0, 40.0), "bunch 3 corrected");
        else        check(near(u[2], 0.0, 40.0) || near(u[2], -1500.0, 40.0),
                          "bunch 3 has one or two corrections");
        if (kicked) begin
          check(slack[m] == d - 1, "kick lost only once, at the slack");
          slack[m] = d;
        end
        $display("  norm=%0d added delay %5.1f ns: bunch 2 at %7.1f, bunch 3 at %7.1f", m, real'(d) * 2.8, u[1], u[2]);
      end
      check(slack[m] >= 0 && slack[m] < 2**KDLY_W - 1, "slack found inside scan range");
      $display("slack with normalisation %s: %0d ticks = %0.1f ns",
               m ? "on" : "off", slack[m], real'(slack[m]) * 2.8);
    end
    check(slack[0] - slack[1] == 3, "normalisation costs 3 ticks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
