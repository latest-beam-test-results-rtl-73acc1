// tb_dac_output: drives random kicks, gates and feedback enables with a
// converter strobe every CLK_DIV ticks, and checks that the DAC word
// changes only after a strobe, is the kick saturated to DAC_W bits when
// feedback is on and the gate open, and zero otherwise.
module tb_dac_output;
  import font4_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic strobe = 1'b0, fb_enable = 1'b1, gate = 1'b1;
  logic signed [KICK_W-1:0] kick = '0;
  logic signed [DAC_W-1:0] dac_data;
  int checks = 0, failures = 0;

  dac_output dut (.*);

  always #1.4 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_v, hi, lo;
    int n_sat = 0;
    hi = (longint'(1) << (DAC_W - 1)) - 1;
    lo = -(longint'(1) << (DAC_W - 1));
    exp_v = 0;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      strobe    = (t % CLK_DIV) == CLK_DIV - 1;
      kick      = KICK_W'($urandom);
      if (t % 3 == 0) kick = KICK_W'($urandom % 8192) - KICK_W'(4096);
      fb_enable = (t / 400) % 4 != 3;
      gate      = (t / 130) % 5 != 4;
      if (strobe) begin
        if (fb_enable && gate) begin
          exp_v = longint'(kick);
          if (exp_v > hi) begin exp_v = hi; n_sat++; end
          if (exp_v < lo) begin exp_v = lo; n_sat++; end
        end else exp_v = 0;
      end
      @(negedge clk);
      check(longint'(dac_data) == exp_v, "dac word");
    end
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
