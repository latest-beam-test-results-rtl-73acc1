// kick_delay: programmable extra delay of the kick word.
//
// The system latency of the prototype was measured by delaying the kick on
// purpose and finding the added delay at which the second bunch is no longer
// kicked. This block adds that delay: it is a shift register of MAX_DLY kick
// words clocked at 357 MHz, and delay selects the tap, in ticks of 2.8 ns.
// delay = 0 passes the input straight through (no register), which is the
// setting for normal operation. The tap range is this design's choice.
//
// Timing: kick_out equals kick_in from delay ticks earlier.
module kick_delay
  import font4_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [KDLY_W-1:0]        delay,
  input  logic signed [KICK_W-1:0] kick_in,
  output logic signed [KICK_W-1:0] kick_out
);

  localparam int unsigned MAX_DLY = 2**KDLY_W - 1;

  logic signed [KICK_W-1:0] line [MAX_DLY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_DLY; i++) line[i] <= '0;
    end else begin
      line[0] <= kick_in;
      for (int i = 1; i < MAX_DLY; i++) line[i] <= line[i-1];
    end
  end

  always_comb begin
    if (delay == '0) kick_out = kick_in;
    else             kick_out = line[delay - 1'b1];
  end

endmodule
