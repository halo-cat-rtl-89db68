// tmem -- tile memory (TMEM), 24KB = 3072 words x 64 bits, used for tile
// concatenation.
//
// One write port and one read port, both synchronous: a write (we) stores
// wdata at waddr at the clock edge; a read (re) returns the word at raddr on
// rdata one clock later. Contents are not reset. A word is one CIM-core
// digital word (eight 8-bit pixels of one row and channel). During tile
// concatenation the output tile of layer K is parked here while the
// neighbouring tile is computed, then written back into a core beside it. The
// 24KB size follows the paper; the 64-bit word and the port timing are this
// design's choices.
module tmem #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 3072
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
