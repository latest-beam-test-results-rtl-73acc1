// tb_adc_capture: checks that the peak sample taken for a bunch is the ADC
// word pair registered on the most recent converter strobe, that it is
// presented one tick after sample_pulse with the right bunch number, and
// that ADC words between strobes are ignored. The ADC inputs change every
// tick with random words, strobes come every CLK_DIV ticks and sample
// pulses at random.
module tb_adc_capture;
  import font4_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic strobe = 1'b0, sample_pulse = 1'b0;
  logic signed [ADC_W-1:0] adc_sum = '0, adc_diff = '0;
  logic [BUNCH_W-1:0] bunch_idx_in = '0;
  logic out_valid;
  bpm_sample_t out_sample;
  logic [BUNCH_W-1:0] out_bunch;
  int checks = 0, failures = 0;

  adc_capture dut (.*);

  always #1.4 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [ADC_W-1:0] reg_sum, reg_diff;   // model of the strobe register
    logic signed [ADC_W-1:0] exp_sum, exp_diff;
    logic [BUNCH_W-1:0] exp_bunch;
    logic exp_valid;
    int n_pulses = 0;
    reg_sum = '0; reg_diff = '0; exp_sum = '0; exp_diff = '0;
    exp_bunch = '0; exp_valid = 1'b0;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      check(out_valid == exp_valid, "valid one tick after pulse");
      if (exp_valid) begin
        check(out_sample.sum == exp_sum && out_sample.diff == exp_diff, "captured pair");
        check(out_bunch == exp_bunch, "bunch number");
      end
      strobe       = (t % CLK_DIV) == CLK_DIV - 1;
      adc_sum      = ADC_W'($urandom);
      adc_diff     = ADC_W'($urandom);
      sample_pulse = ($urandom % 7) == 0;
      bunch_idx_in = BUNCH_W'($urandom);
      // what the next edge does: capture the old register, then load it
      exp_valid = sample_pulse;
      if (sample_pulse) begin
        exp_sum   = reg_sum;
        exp_diff  = reg_diff;
        exp_bunch = bunch_idx_in;
        n_pulses++;
      end
      if (strobe) begin
        reg_sum  = adc_sum;
        reg_diff = adc_diff;
      end
    end
    check(n_pulses > 100, "enough pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
