// tb_charge_normaliser: checks the reciprocal-table division and its
// 3-tick latency. For random sum and difference words (sum positive, as
// the BPM sum signal is) the output must equal
//   sat(diff * R(sum >> 3) >>> 6),  R(a) = min(65535, round(65536/a)), R(0)=65535
// computed here independently, arrive exactly 3 ticks after the input, and
// lie within 1% of full scale of the ideal diff/sum * 8192 when the sum is
// above a quarter of full scale. With normalisation off the difference
// must come out unchanged in the same tick.
module tb_charge_normaliser;
  import font4_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic norm_enable = 1'b1, in_valid = 1'b0;
  bpm_sample_t in_sample = '0;
  logic out_valid;
  logic signed [POS_W-1:0] out_pos;
  int checks = 0, failures = 0;

  charge_normaliser dut (.*);

  always #1.4 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s at %0t", what, $time);
    end
  endtask

  function automatic longint ref_pos(input int sum, input int diff);
    longint a, r, p;
    a = (sum < 0) ? 0 : (sum >> 3);
    r = (a == 0) ? 65535 : (65536 + a / 2) / a;
    if (r > 65535) r = 65535;
    p = (longint'(diff) * r) >>> 6;
    if (p > 8191) p = 8191;
    if (p < -8192) p = -8192;
    return p;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // scoreboard: expected values queued with the tick they are due
  longint exp_q[$];
  int     due_q[$];
  int     tick = 0;
  always @(posedge clk) tick <= tick + 1;

  initial begin
    int sum, diff, n_out;
    real ideal;
    n_out = 0;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      // check outputs of the previous edge
      if (out_valid) begin
        check(exp_q.size() > 0, "no unexpected output");
        if (exp_q.size() > 0) begin
          check(tick == due_q[0], "3-tick latency");
          check(longint'(out_pos) == exp_q[0], "normalised position");
          void'(exp_q.pop_front());
          void'(due_q.pop_front());
          n_out++;
        end
      end else begin
        check(exp_q.size() == 0 || due_q[0] != tick, "output not missing");
      end
      in_valid = ($urandom % 3) == 0;
      sum  = (t % 10 == 0) ? -int'($urandom % 100) : int'($urandom % 8192);
      diff = int'($urandom % 16384) - 8192;
      if (diff > sum && sum > 0) diff = diff % sum;
      in_sample.sum  = ADC_W'(sum);
      in_sample.diff = ADC_W'(diff);
      if (in_valid) begin
        exp_q.push_back(ref_pos(sum, diff));
        due_q.push_back(tick + 3);
        if (sum > 2048) begin
          ideal = real'(diff) / real'(sum) * 8192.0;
          if (ideal > 8191.0) ideal = 8191.0;
          if (ideal < -8192.0) ideal = -8192.0;
          check((ref_pos(sum, diff) - ideal) < 82.0 && (ideal - ref_pos(sum, diff)) < 82.0,
                "reference within 1% of ideal");
        end
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    check(n_out > 500, "enough results");
    check(exp_q.size() == 0, "all results delivered");
    // bypass: same tick, difference unchanged
    norm_enable = 1'b0;
    for (int t = 0; t < 50; t++) begin
      in_valid = 1'b1;
      in_sample.sum  = ADC_W'($urandom);
      in_sample.diff = ADC_W'($urandom);
      #0.1;
      check(out_valid && out_pos == POS_W'(in_sample.diff), "bypass passes diff");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
