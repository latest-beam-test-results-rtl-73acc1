// tb_kick_delay: feeds a random kick word every tick and checks, for every
// delay setting 0..31, that the output equals the input of exactly that many
// ticks earlier (delay 0: the same tick).
module tb_kick_delay;
  import font4_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [KDLY_W-1:0] delay = '0;
  logic signed [KICK_W-1:0] kick_in = '0;
  logic signed [KICK_W-1:0] kick_out;
  int checks = 0, failures = 0;

  kick_delay dut (.*);

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

  logic signed [KICK_W-1:0] hist[$];   // hist[0] = current input

  initial begin
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int d = 0; d < 2**KDLY_W; d++) begin
      delay = KDLY_W'(d);
      for (int i = 0; i < 80; i++) begin
        kick_in = KICK_W'($urandom);
        hist.push_front(kick_in);
        if (hist.size() > 64) void'(hist.pop_back());
        #0.1;
        if (hist.size() > d) check(kick_out == hist[d], "delayed kick");
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
