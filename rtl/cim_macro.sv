// cim_macro -- behavioural model of one analog CIM macro (16 rows x 128
// clusters of 6T SRAM with one local computing unit per cluster and a 7-bit
// intra-macro A/D conversion). The real macro is a mixed-signal circuit; this
// model reproduces its digital behaviour, not its analog one.
//
// Storage: bitcell[r][c] holds one activation bit (one bit plane P of one tile
// column). MAC mode: when mac_en is high, row mac_row is activated; every LCU
// forms IN AND W (IN = stored bit, W = weight bit of its cluster), the 128
// products are charge-shared and converted. The model takes the exact count
// and converts it with an ideal ADC_BITS quantiser that saturates at
// 2**ADC_BITS-1 (a 7-bit code cannot hold the count 128). The code appears on
// mac_code one clock after mac_en. Analog noise is not modelled.
//
// Digital port (the R/W path of the LCU): dig_en with dig_we writes bit
// dig_wbit to (dig_row, dig_cluster); with dig_we low the bit is returned on
// dig_rbit one clock later. The paper gives the cluster size, the AND of
// activation and weight and the 7-bit ADC; the one-cycle timing and the
// saturating quantiser are this model's choices.
module cim_macro #(
  parameter int unsigned NCLUSTER = 128,
  parameter int unsigned NROW     = 16,
  parameter int unsigned ADC_BITS = 7
) (
  input  logic                        clk,
  // MAC mode
  input  logic                        mac_en,
  input  logic [$clog2(NROW)-1:0]     mac_row,
  input  logic [NCLUSTER-1:0]         weight,
  output logic [ADC_BITS-1:0]         mac_code,
  // digital read/write
  input  logic                        dig_en,
  input  logic                        dig_we,
  input  logic [$clog2(NROW)-1:0]     dig_row,
  input  logic [$clog2(NCLUSTER)-1:0] dig_cluster,
  input  logic                        dig_wbit,
  output logic                        dig_rbit
);

  localparam int unsigned CNT_BITS = $clog2(NCLUSTER + 1);
  localparam int unsigned CODE_MAX = (1 << ADC_BITS) - 1;

  logic [NCLUSTER-1:0] bitcell [NROW];

  // LCU products and charge-sharing sum
  logic [NCLUSTER-1:0] prod;
  logic [CNT_BITS-1:0] count;
  logic [ADC_BITS-1:0] code;

  always_comb begin
    prod  = bitcell[mac_row] & weight;
    count = '0;
    for (int unsigned c = 0; c < NCLUSTER; c++) count = count + CNT_BITS'(prod[c]);
    if (32'(count) > CODE_MAX) code = ADC_BITS'(CODE_MAX);
    else                       code = count[ADC_BITS-1:0];
  end

  always_ff @(posedge clk) begin
    if (mac_en) mac_code <= code;
    if (dig_en && dig_we) bitcell[dig_row][dig_cluster] <= dig_wbit;
    if (dig_en && !dig_we) dig_rbit <= bitcell[dig_row][dig_cluster];
  end

endmodule
