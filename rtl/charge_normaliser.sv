// charge_normaliser: divides the difference signal by the sum signal.
//
// A stripline BPM's difference signal scales with both beam position and
// bunch charge; dividing by the sum signal removes the charge. As in the
// prototype, the division is a table of reciprocals of the sum held in FPGA
// RAM followed by a multiply, and it costs 3 clock cycles (8.4 ns at
// 357 MHz):
//   tick 1  recip  <= RECIP[sum[ADC_W-2 -: RA_W]]     (synchronous ROM read)
//   tick 2  prod   <= diff * recip
//   tick 3  pos    <= sat(prod >>> SHIFT)
// The table is built at elaboration:
//   RECIP[a] = min(2^16-1, round(2^16 / a)),  RECIP[0] = 2^16-1
// where a is the sum's top RA_W magnitude bits, so that with the default
// widths pos = diff/sum * 2^13 (Q1.13, +-1 at full scale). A zero or negative
// sum reads RECIP[0] and the result saturates.
//
// With norm_enable low the unit is bypassed: pos = diff and out_valid =
// in_valid in the same tick, which is the firmware without real-time charge
// normalisation that was used for the latency measurement. The table
// format, the widths and the rounding are this design's choices.
module charge_normaliser
  import font4_pkg::*;
#(
  parameter int unsigned RA_W = 10   // reciprocal table address bits (1024 entries)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    norm_enable,
  input  logic                    in_valid,
  input  bpm_sample_t             in_sample,
  output logic                    out_valid,
  output logic signed [POS_W-1:0] out_pos
);

  localparam int unsigned RECIP_W = 16;
  // diff * 2^RECIP_W / (sum / 2^(ADC_W-1-RA_W)) scaled to Q1.(POS_W-1)
  localparam int unsigned SHIFT   = RECIP_W + (ADC_W - 1 - RA_W) - (POS_W - 1);
  localparam int unsigned PROD_W  = ADC_W + RECIP_W + 1;

  logic [RECIP_W-1:0] recip_rom [2**RA_W];

  initial begin
    for (int a = 0; a < 2**RA_W; a++) begin
      if (a == 0) recip_rom[a] = '1;
      else        recip_rom[a] = RECIP_W'(((2**RECIP_W) + a / 2) / a > (2**RECIP_W) - 1 ?
                                          (2**RECIP_W) - 1 : ((2**RECIP_W) + a / 2) / a);
    end
  end

  logic [RA_W-1:0]            addr;
  logic [RECIP_W-1:0]         recip_q;
  logic signed [ADC_W-1:0]    diff_q;
  logic signed [PROD_W-1:0]   prod_q;
  logic signed [POS_W-1:0]    pos_q;
  logic [2:0]                 vld;

  // negative sums address entry 0
  assign addr = in_sample.sum[ADC_W-1] ? '0 : in_sample.sum[ADC_W-2 -: RA_W];

  always_ff @(posedge clk) begin
    recip_q <= recip_rom[addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld    <= '0;
      diff_q <= '0;
      prod_q <= '0;
      pos_q  <= '0;
    end else begin
      vld    <= {vld[1:0], in_valid & norm_enable};
      diff_q <= in_sample.diff;
      prod_q <= PROD_W'(diff_q) * $signed({1'b0, recip_q});
      pos_q  <= POS_W'(sat_signed(48'(prod_q >>> SHIFT), POS_W));
    end
  end

  always_comb begin
    if (norm_enable) begin
      out_valid = vld[2];
      out_pos   = pos_q;
    end else begin
      out_valid = in_valid;
      out_pos   = POS_W'(in_sample.diff);
    end
  end

endmodule
