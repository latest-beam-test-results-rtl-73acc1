// tb_bunch_timing: checks per-bunch peak-sample timing after a pre-beam
// trigger. Runs a 3-bunch train at 154 ns spacing (55 ticks), a 60-bunch
// train at 140 ns (50 ticks), a zero-bunch train and a retrigger during a
// train. Every sample_pulse must land at first_delay + k*spacing + 1 ticks
// after train_start with bunch_idx = k, and the window must close one
// spacing after the last bunch.
module tb_bunch_timing;
  import font4_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, trig_in = 1'b0;
  logic [BUNCH_W-1:0]   n_bunches;
  logic [TICK_W-1:0]    first_delay;
  logic [SPACING_W-1:0] bunch_spacing;
  logic train_start, train_active, sample_pulse;
  logic [BUNCH_W-1:0] bunch_idx;
  int checks = 0, failures = 0;
  int tick = 0;

  bunch_timing dut (.*);

  always #1.4 clk = ~clk;
  always @(posedge clk) tick <= tick + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at tick %0d", what, tick);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run one train and check it; abort_after > 0 retriggers after that many ticks.
  task automatic run_train(input int nb, input int fd, input int sp, input int abort_after);
    int t0, k, t, end_t;
    n_bunches = BUNCH_W'(nb); first_delay = TICK_W'(fd); bunch_spacing = SPACING_W'(sp);
    @(negedge clk) trig_in = 1'b1;
    // train_start appears within 3 ticks (synchroniser)
    t = 0;
    do begin @(negedge clk); t++; end while (!train_start && t < 10);
    check(train_start, "train_start seen");
    check(t == 3, "trigger to train_start = 3 ticks");
    trig_in = 1'b0;
    t0 = tick;
    k = 0;
    end_t = fd + (nb - 1) * sp + sp;   // window closes one spacing after last bunch
    forever begin
      @(negedge clk);
      t = tick - t0;
      if (abort_after > 0 && t == abort_after) break;
      if (sample_pulse) begin
        check(k < nb, "no extra sample pulses");
        check(t == fd + k * sp + 1, "sample tick");
        check(bunch_idx == BUNCH_W'(k), "bunch index");
        k++;
      end
      if (!train_active) begin
        check(k == nb, "all bunches sampled");
        check(t == end_t + 1 || nb == 0, "window length");
        break;
      end
      if (t > 5000) begin check(1'b0, "train never ended"); break; end
    end
  endtask

  initial begin
    n_bunches = '0; first_delay = '0; bunch_spacing = '0;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(!train_active && !sample_pulse, "idle after reset");
    run_train(3, 20, 55, 0);
    repeat (10) @(posedge clk);
    run_train(60, 7, 50, 0);
    repeat (10) @(posedge clk);
    run_train(0, 7, 50, 0);
    repeat (10) @(posedge clk);
    // retrigger mid-train: the second train must restart from bunch 0
    run_train(3, 30, 55, 60);
    run_train(3, 30, 55, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
