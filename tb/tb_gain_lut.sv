// tb_gain_lut: loads a random gain table through the write port, keeping a
// copy here, then reads it with random positions and checks that each
// correction is the entry addressed by the position's top GA_W bits, one
// tick after in_valid. Also checks that a freshly reset table reads zero
// and that a read in the tick of a write to the same entry returns the
// old value.
module tb_gain_lut;
  import font4_pkg::*;

  localparam int unsigned GA_W = 10;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0;
  logic [GA_W-1:0] wr_addr = '0;
  logic signed [CORR_W-1:0] wr_data = '0;
  logic in_valid = 1'b0;
  logic signed [POS_W-1:0] in_pos = '0;
  logic out_valid;
  logic signed [CORR_W-1:0] out_corr;
  int checks = 0, failures = 0;

  gain_lut #(.GA_W(GA_W)) dut (.*);

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

  logic signed [CORR_W-1:0] model [2**GA_W];

  initial begin
    logic signed [CORR_W-1:0] exp_corr;
    logic [GA_W-1:0] a;
    #0.5 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // unloaded table gives zero
    for (int i = 0; i < 20; i++) begin
      in_valid = 1'b1; in_pos = POS_W'($urandom);
      @(negedge clk);
      check(out_valid && out_corr == '0, "empty table reads zero");
    end
    in_valid = 1'b0;
    // load
    for (int i = 0; i < 2**GA_W; i++) begin
      wr_en = 1'b1; wr_addr = GA_W'(i); wr_data = CORR_W'($urandom);
      model[i] = wr_data;
      @(negedge clk);
    end
    wr_en = 1'b0;
    @(negedge clk);
    check(!out_valid, "no valid without input");
    // read back through positions
    for (int i = 0; i < 3000; i++) begin
      in_valid = ($urandom % 2) == 0;
      in_pos   = POS_W'($urandom);
      a        = in_pos[POS_W-1 -: GA_W];
      exp_corr = model[a];
      // same-tick write to the read entry: old value must be read
      wr_en   = (i % 50) == 0;
      wr_addr = a;
      wr_data = CORR_W'($urandom);
      @(negedge clk);
      check(out_valid == in_valid, "valid one tick later");
      if (in_valid) check(out_corr == exp_corr, "table entry");
      if (wr_en) model[a] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
