// tb_sample_clock_gen: checks the 357/4 converter clock and sample strobe.
// Over 200 ticks after reset it checks that the strobe is one tick wide and
// exactly CLK_DIV ticks apart, that the converter clock is high for the
// first half of each period and that the strobe sits in the last tick.
module tb_sample_clock_gen;
  import font4_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic conv_clk, strobe;
  int checks = 0, failures = 0;

  sample_clock_gen dut (.clk, .rst_n, .conv_clk, .strobe);

  always #1.4 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t conv=%0b strobe=%0b", what, $time, conv_clk, strobe);
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, last_strobe, n_strobes;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    last_strobe = -1;
    n_strobes   = 0;
    for (t = 0; t < 200; t++) begin
      @(negedge clk);
      // the model: phase = (t+1) mod CLK_DIV, reset released on a falling edge
      check(conv_clk == (((t + 1) % CLK_DIV) < CLK_DIV / 2), "conv_clk phase");
      check(strobe == (((t + 1) % CLK_DIV) == CLK_DIV - 1), "strobe phase");
      if (strobe) begin
        if (last_strobe >= 0) check(t - last_strobe == CLK_DIV, "strobe spacing");
        last_strobe = t;
        n_strobes++;
      end
    end
    check(n_strobes == 200 / CLK_DIV, "strobe count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
