// tb_delay_loop_acc: drives random corrections and train-start clears and
// checks the kick against a saturating running sum kept here:
//   kick(n) = clamp(kick(n-1) + corr(n)) to the KICK_W-bit range,
// updated one tick after in_valid and held otherwise. Includes long runs
// of large corrections so both saturation limits are reached.
module tb_delay_loop_acc;
  import font4_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic clear = 1'b0, in_valid = 1'b0;
  logic signed [CORR_W-1:0] in_corr = '0;
  logic out_valid;
  logic signed [KICK_W-1:0] kick;
  int checks = 0, failures = 0;

  delay_loop_acc dut (.*);

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
    longint model, hi, lo;
    int n_hi = 0, n_lo = 0;
    hi = (longint'(1) << (KICK_W - 1)) - 1;
    lo = -(longint'(1) << (KICK_W - 1));
    model = 0;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(kick == '0, "reset kick");
    for (int i = 0; i < 5000; i++) begin
      clear    = (i % 97) == 0;
      in_valid = ($urandom % 3) != 0;
      if ((i / 500) % 2 == 1) in_corr = CORR_W'((i / 1000) % 2 ? 20000 : -20000);
      else                    in_corr = CORR_W'($urandom);
      if (clear) model = 0;
      else if (in_valid) begin
        model = model + longint'(in_corr);
        if (model > hi) model = hi;
        if (model < lo) model = lo;
      end
      @(negedge clk);
      check(longint'(kick) == model, "kick value");
      check(out_valid == (in_valid && !clear), "out_valid");
      if (model == hi) n_hi++;
      if (model == lo) n_lo++;
    end
    check(n_hi > 0 && n_lo > 0, "both limits reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
