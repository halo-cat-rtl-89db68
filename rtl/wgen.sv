// wgen -- on-chip random weight generator (WGEN).
//
// A hidden network never stores its weights: they are random and are
// regenerated on chip whenever they are needed, which is what lets the
// layer-penetrative tiling revisit every layer for every tile at no DRAM cost.
// The generator must therefore give the same weights for the same weight
// index on every tile. This implementation is counter-based: a 32-bit state
// is formed from the layer seed, output channel, kernel position and input
// channel chunk,
//     s0 = ({seed,16'h0} ^ {4'h0,oc,kpos,chunk,6'h0}) ^ 32'h9E3779B9
// (replaced by 1 if zero), and NOUT/32 xorshift32 steps
//     x ^= x << 13;  x ^= x >> 17;  x ^= x << 5
// each give 32 sign bits, sign[32*i +: 32] = x after step i+1. A set bit
// means a negative weight. Combinational; the registered copy lives in WBUF.
// The paper asks only for a "standard random number generator"; the xorshift
// and the seeding are this design's choices.
module wgen #(
  parameter int unsigned NOUT = 128   // sign bits per vector, multiple of 32
) (
  input  logic [15:0]     seed,
  input  logic [11:0]     oc,
  input  logic [5:0]      kpos,
  input  logic [3:0]      chunk,
  output logic [NOUT-1:0] sign
);

  logic [31:0] x;

  always_comb begin
    x = ({seed, 16'h0} ^ {4'h0, oc, kpos, chunk, 6'h0}) ^ 32'h9E37_79B9;
    if (x == '0) x = 32'd1;
    sign = '0;
    for (int unsigned i = 0; i < NOUT / 32; i++) begin
      x = x ^ (x << 13);
      x = x ^ (x >> 17);
      x = x ^ (x << 5);
      sign[32*i +: 32] = x;
    end
  end

endmodule
