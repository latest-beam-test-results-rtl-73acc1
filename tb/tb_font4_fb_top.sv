// tb_font4_fb_top: end-to-end test of the feedback processor in a closed
// loop with a simple beam model, at the module's default parameters.
//
// Beam model (this testbench's own): bunch k of a train arrives with an
// incoming position u0[k], in normalised units (Q1.13, 8192 = the BPM's
// full scale), and charge Q. The kicker adds the DAC word, one DAC step per
// unit, as it stood ALAT ticks before the bunch reaches the BPM; ALAT stands
// for the ADC pipeline, the amplifier, the kicker and the cables. The BPM
// front end then presents sum = Q and diff = Q*u/8192 to the ADCs until the
// next bunch arrives.
//
// The gain table is loaded with corr = -G * pos (loop gain G), so the
// expected positions follow the delay-loop recursion
//     u[k] = u0[k] + kick[k-1],   kick[k] = kick[k-1] - G * u[k]
// worked out here in real arithmetic and compared with the processor's
// normalised-position monitor to within a few units.
//
// Mechanisms exercised and counted (each must occur): feedback on and
// off, charge normalisation on and bypassed, low / matched / high gain
// (under-, exact and over-correction), an added kick delay that makes the
// kick miss bunch 2, the delay-loop hold over a 60-bunch train, and the
// accumulator clear between trains. Latencies are checked in ticks:
// bunch_sampled to kick_valid is 5 ticks with normalisation and 2 without.
module tb_font4_fb_top;
  import font4_pkg::*;

  localparam int GA_W   = 10;       // the top's default
  localparam int ALAT   = 33;       // analogue part of the loop, ticks
  localparam int Q      = 4000;     // bunch charge, ADC counts of the sum
  localparam int FD     = 120;      // trigger to first peak, ticks
  localparam int SP     = 55;       // 154 ns bunch spacing

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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tick counter and DAC history for the beam model
  int tick = 0;
  logic signed [DAC_W-1:0] dac_hist [4096];
  always @(posedge clk) begin
    tick <= tick + 1;
    dac_hist[tick % 4096] <= dac_data;
  end

  // mechanism counters
  int n_fb_on = 0, n_fb_off = 0, n_norm = 0, n_bypass = 0;
  int n_under = 0, n_exact = 0, n_over = 0, n_late = 0, n_hold = 0, n_clear = 0;

  // measured positions of the current train, from the monitor port
  real meas [64];
  int  n_meas;
  int  last_sampled_tick;
  int  lat_seen [2];   // latency checks done per mode
  int  first_dac_tick;
  always @(negedge clk) begin
    if (dac_data != '0 && first_dac_tick < 0) first_dac_tick = tick;
    if (bunch_sampled) begin
      last_sampled_tick = tick;
    end
    if (kick_valid) begin
      checks++;
      if (tick - last_sampled_tick != (cfg.norm_enable ? 5 : 2)) begin
        failures++;
        $display("FAIL: kick latency %0d ticks", tick - last_sampled_tick);
      end
      lat_seen[cfg.norm_enable]++;
    end
    if (pos_valid) begin
      meas[n_meas] = real'(pos);
      n_meas++;
    end
  end

  task automatic load_gain(input real g, input bit norm);
    // entry i covers positions signed(i)<<4 .. +15; the table is written
    // for the bin centre. Bypassed, the position is the raw difference,
    // Q/8192 of the normalised one, so the gain is scaled up by 8192/Q.
    real scale, p, c;
    scale = norm ? 1.0 : 8192.0 / real'(Q);
    for (int i = 0; i < 2**GA_W; i++) begin
      p = real'(signed'(GA_W'(i))) * 16.0 + 8.0;
      c = -g * scale * p;
      @(negedge clk);
      gain_wr_en = 1'b1; gain_wr_addr = GA_W'(i); gain_wr_data = CORR_W'($rtoi(c));
    end
    @(negedge clk) gain_wr_en = 1'b0;
  endtask

  // Run one train; u0 is the incoming position of every bunch.
  task automatic run_train(input int nb, input real u0, input real g,
                           input bit fb, input bit norm, input int kdly,
                           output real u_out [64]);
    int t_trig, arr, k;
    real u;
    cfg.fb_enable = fb; cfg.norm_enable = norm; cfg.n_bunches = BUNCH_W'(nb);
    cfg.first_delay = TICK_W'(FD); cfg.bunch_spacing = SPACING_W'(SP);
    cfg.kick_delay = KDLY_W'(kdly);
    n_meas = 0;
    first_dac_tick = -1;
    @(negedge clk);
    trig_in = 1'b1;
    t_trig = tick;
    for (k = 0; k < nb; k++) begin
      // bunch k reaches the BPM a few ticks before its peak sample
      arr = t_trig + 3 + FD + k * SP - 6;
      while (tick < arr) @(negedge clk);
      if (k == 0) trig_in = 1'b0;
      u = u0 + real'(dac_hist[(arr - ALAT) % 4096]);
      u_out[k] = u;
      adc_sum  = ADC_W'(Q);
      adc_diff = ADC_W'($rtoi(real'(Q) * u / 8192.0));
    end
    while (train_active || tick < arr + 20) @(negedge clk);
    adc_sum = '0; adc_diff = '0;
    check(n_meas == nb, "one position per bunch");
    repeat (20) @(negedge clk);
  endtask

  function automatic bit near(input real a, input real b, input real tol);
    return (a - b < tol) && (b - a < tol);
  endfunction

  initial begin
    real u[64];
    real expk, expu, scale;
    cfg = '0;
    lat_seen[0] = 0; lat_seen[1] = 0;
    last_sampled_tick = 0;
    n_meas = 0;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (ALAT + 10) @(negedge clk);

    // 1. feedback off: every bunch at its incoming position
    load_gain(1.0, 1'b1);
    run_train(3, 1500.0, 1.0, 1'b0, 1'b1, 0, u);
    n_fb_off++;
    for (int k = 0; k < 3; k++) begin
      check(near(u[k], 1500.0, 1.0), "no kick with feedback off");
      check(near(meas[k], 1500.0, 8.0), "normalised position, feedback off");
    end
    check(dac_data == '0, "DAC idle after train");

    // 2. gain scan with normalisation, feedback on: low, matched, high
    for (int gi = 0; gi < 3; gi++) begin
      real g;
      g = (gi == 0) ? 0.5 : (gi == 1) ? 1.0 : 1.5;
      load_gain(g, 1'b1);
      run_train(3, 1500.0, g, 1'b1, 1'b1, 0, u);
      n_fb_on++; n_norm++; n_clear++;
      expk = 0.0;
      for (int k = 0; k < 3; k++) begin
        expu = 1500.0 + expk;
        check(near(u[k], expu, 30.0), "bunch position follows delay-loop recursion");
        check(near(meas[k], u[k], 8.0), "normalised position equals beam position");
        expk = expk - g * u[k];
      end
      $display("  gain %f: u = %f %f %f  meas = %f %f %f", g, u[0], u[1], u[2], meas[0], meas[1], meas[2]);
      // third bunch: (1-G)^2 of the offset
      if (gi == 0) begin check(u[2] > 100.0, "low gain under-corrects"); n_under++; end
      if (gi == 1) begin check(near(u[1], 0.0, 30.0) && near(u[2], 0.0, 30.0), "matched gain corrects"); n_exact++; end
      if (gi == 2) begin check(u[1] < -300.0, "high gain over-corrects"); n_over++; end
    end

    // 3. normalisation bypassed (the latency-test firmware), matched gain
    load_gain(1.0, 1'b0);
    run_train(3, -1200.0, 1.0, 1'b1, 1'b0, 0, u);
    n_bypass++;
    check(near(u[1], 0.0, 40.0) && near(u[2], 0.0, 40.0), "bypass mode corrects");
    check(near(meas[0], -1200.0 * real'(Q) / 8192.0, 2.0), "bypass position is raw difference");

    // 4. added kick delay past the slack: bunch 2 misses its kick
    load_gain(1.0, 1'b1);
    run_train(3, 1500.0, 1.0, 1'b1, 1'b1, 31, u);
    check(near(u[1], 1500.0, 1.0), "late kick misses bunch 2");
    check(near(u[2], 0.0, 30.0), "late kick still reaches bunch 3");
    n_late++;

    // 5. long train: the correction is held by the delay loop
    run_train(60, 800.0, 1.0, 1'b1, 1'b1, 0, u);
    for (int k = 1; k < 60; k++) check(near(u[k], 0.0, 30.0), "correction held over 60 bunches");
    n_hold++;
    check(dac_data == '0, "DAC zero after the train window");

    check(lat_seen[0] > 0 && lat_seen[1] > 0, "latency checked in both modes");
    $display("mechanisms: fb_on=%0d fb_off=%0d norm=%0d bypass=%0d under=%0d exact=%0d over=%0d late_kick=%0d hold60=%0d clear=%0d",
             n_fb_on, n_fb_off, n_norm, n_bypass, n_under, n_exact, n_over, n_late, n_hold, n_clear);
    check(n_fb_on > 0 && n_fb_off > 0 && n_norm > 0 && n_bypass > 0 && n_under > 0 &&
          n_exact > 0 && n_over > 0 && n_late > 0 && n_hold > 0 && n_clear > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
