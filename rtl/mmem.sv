// mmem -- supermask memory (MMEM), 32KB = 2048 words x 128 bits.
//
// One write port and one read port, both synchronous: a write (we) stores
// wdata at waddr at the clock edge; a read (re) returns the word at raddr on
// rdata one clock later. Contents are not reset. Each word holds the binary
// supermask of one 128-channel weight vector, one bit per CIM cluster; the
// controller addresses it as mask_base + ((oc*K*K + kpos)*chunks + chunk). The
// 32KB size follows the paper; the word format, host write port and read
// latency are this design's choices.
module mmem #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 2048
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
