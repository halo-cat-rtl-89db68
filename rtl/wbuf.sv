// wbuf -- weight buffer: supermask masking of the generated weights.
//
// A hidden-network weight is the random weight AND its supermask bit: a
// masked-out weight is zero, a kept weight is +1 or -1 (its random sign).
// The CIM local computing unit multiplies a 1-bit activation by a 1-bit
// weight, so a signed weight vector is applied in two passes: pass neg=0
// loads the +1 weights (mask & ~sign), pass neg=1 the -1 weights
// (mask & sign); the NMP subtracts the second pass. When load is high the
// selected vector is registered and appears on weight one clock later. The
// masking (AND with the supermask) follows the paper; the two-pass sign
// handling and the single register stage are this design's choices.
//
// Pixel slots: when slot_lg < 7 the input layer packs several pixels into one
// core row, 2**slot_lg clusters each (the paper's shallow-channel mapping).
// Only the low 2**slot_lg weight bits are kept and they are moved up by
// slot_off clusters, onto the pixel being read; all other clusters get weight
// 0. slot_lg = 7 (with slot_off = 0) uses the vector as it is.
module wbuf #(
  parameter int unsigned N = 128
) (
  input  logic         clk,
  input  logic         load,
  input  logic         neg,      // 0: positive pass, 1: negative pass
  input  logic [N-1:0] mask,     // supermask word from MMEM
  input  logic [N-1:0] sign,     // random signs from WGEN (1 = negative)
  input  logic [2:0]   slot_lg,  // log2 clusters per pixel slot (7: whole vector)
  input  logic [$clog2(N)-1:0] slot_off,  // first cluster of the slot
  output logic [N-1:0] weight
);

  logic [N-1:0] keep, w;
  always_comb begin
    if (slot_lg >= 3'd7) keep = '1;
    else                 keep = (N'(1) << (1 << slot_lg)) - N'(1);
    w = (neg ? (mask & sign) : (mask & ~sign)) & keep;
    w = w << slot_off;
  end

  always_ff @(posedge clk) begin
    if (load) weight <= w;
  end

endmodule
