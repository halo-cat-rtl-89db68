// nmp -- near-memory pipeline (NMP): convolution sum and post-processing.
//
// Convolution sum. A K x K convolution is run as K*K kernel-pixel passes over
// the iCIM (times the input-channel chunks and the two weight-sign passes).
// Each pass delivers NL MAC outputs, one per tile column. The MAC shifter
// aligns them to the output column: lane w takes mac[w + sh], where sh is the
// kernel column offset (-1, 0, +1 for K = 3), and takes zero when w + sh
// falls outside the tile (0 .. tile_w-1). That zero is the in-tile padding of
// block convolution, so no data from a neighbouring tile is ever needed.
// With acc_en the aligned value is added to (neg = 0) or subtracted from
// (neg = 1) accumulator reg[w]; clear zeroes all accumulators (clear wins).
//
// Post-processing, one clock, started by post_en (out_valid follows one clock
// later): per lane
//   v = ((reg[w] * scale) >>> shift) + bias + (res_en ? res[w] : 0)
//   out[w] = clamp(v, 0, 255)      (ReLU and clamp to the 8-bit activation)
// The stage order (MAC shifter, accumulate, Scale, Shift, Bias, Depth Sum,
// ReLU & Clamp) follows the paper's NMP figure. The paper only names the
// Depth Sum stage; here it adds a second 8-bit operand, which the top uses for
// the shortcut of a residual connection. Widths and the single post stage
// are this design's choices.
module nmp
  import halo_cat_pkg::*;
#(
  parameter int unsigned NL = NGROUP,     // lanes = tile columns
  parameter int unsigned MW = MAC_BITS,   // MAC input width (unsigned)
  parameter int unsigned AW = ACC_BITS    // accumulator width (signed)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // convolution sum
  input  logic                      clear,
  input  logic                      acc_en,
  input  logic [NL-1:0][MW-1:0]     mac,
  input  logic signed [3:0]         sh,       // kernel column offset
  input  logic                      neg,      // negative-weight pass
  input  logic [3:0]                tile_w,   // valid lanes
  // post-processing
  input  logic                      post_en,
  input  logic [7:0]                scale,
  input  logic [4:0]                shift,
  input  logic signed [15:0]        bias,
  input  logic                      res_en,
  input  logic [NL-1:0][7:0]        res,
  output logic                      out_valid,
  output logic [NL-1:0][7:0]        out
);

  localparam int unsigned PW = AW + 10;  // post-processing width

  logic signed [AW-1:0] acc [NL];

  // MAC shifter with in-tile zero fill
  logic signed [AW-1:0] aligned [NL];
  always_comb begin
    for (int w = 0; w < int'(NL); w++) begin
      int src;
      src = w + int'(sh);
      if (src >= 0 && src < int'(tile_w) && src < int'(NL))
        aligned[w] = AW'(mac[src]);
      else
        aligned[w] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < int'(NL); w++) acc[w] <= '0;
    end else if (clear) begin
      for (int w = 0; w < int'(NL); w++) acc[w] <= '0;
    end else if (acc_en) begin
      for (int w = 0; w < int'(NL); w++)
        acc[w] <= neg ? acc[w] - aligned[w] : acc[w] + aligned[w];
    end
  end

  // post-processing
  logic [NL-1:0][7:0] pp;
  always_comb begin
    for (int w = 0; w < int'(NL); w++) begin
      logic signed [PW-1:0] v;
      v = PW'(acc[w]) * $signed({1'b0, scale});
      v = v >>> shift;
      v = v + PW'(bias);
      if (res_en) v = v + PW'($signed({1'b0, res[w]}));
      if (v < 0)        pp[w] = 8'd0;
      else if (v > 255) pp[w] = 8'd255;
      else              pp[w] = v[7:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= post_en;
      if (post_en) out <= pp;
    end
  end

endmodule
