// gain_lut: feedback gain stage as a lookup table in FPGA RAM.
//
// The prototype applies its gain through a table held in FPGA RAM rather
// than a multiplier, so the operator can load any transfer curve (the beam
// tests used low, medium and high gain settings). The table is indexed by the
// top GA_W bits of the normalised position, read as an unsigned address
// (the low POS_W-GA_W position bits are not used; two's-complement order: entry i holds the correction for
// pos = signed(i) << (POS_W-GA_W)), and returns a signed correction of
// CORR_W bits. The loop sign is part of the table contents.
//
// The table is loaded through a simple synchronous write port (wr_en,
// wr_addr, wr_data) from the board's control host; it starts at zero, so an
// unloaded table gives no correction. Table size, port and start value are
// this design's choices.
//
// Timing: out_valid and out_corr follow in_valid by one tick. A write and a
// read of the same entry in one tick return the old value.
module gain_lut
  import font4_pkg::*;
#(
  parameter int unsigned GA_W = 10   // table address bits (1024 entries)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // host write port
  input  logic                     wr_en,
  input  logic [GA_W-1:0]          wr_addr,
  input  logic signed [CORR_W-1:0] wr_data,
  // datapath
  input  logic                     in_valid,
  input  logic signed [POS_W-1:0]  in_pos,
  output logic                     out_valid,
  output logic signed [CORR_W-1:0] out_corr
);

  logic signed [CORR_W-1:0] table_ram [2**GA_W];

  initial begin
    for (int i = 0; i < 2**GA_W; i++) table_ram[i] = '0;
  end

  logic [GA_W-1:0] rd_addr;
  assign rd_addr = in_pos[POS_W-1 -: GA_W];

  always_ff @(posedge clk) begin
    if (wr_en) table_ram[wr_addr] <= wr_data;
    out_corr <= table_ram[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
