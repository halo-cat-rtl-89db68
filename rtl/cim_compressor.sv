// cim_compressor -- shift-and-add compressor of one CIM group.
//
// The eight macros of a group hold the eight bit planes of the activations,
// MSB to LSB. Each macro delivers the ADC code of its bit plane for the active
// row; the compressor weights code p by 2**p and sums them, giving the
// multi-bit MAC result of the tile column (activation x binary weight summed
// over the 128 channels of the row). Purely combinational. The shift-and-add
// structure follows the paper's figure of the CIM group; the output width is
// the exact width of the sum.
module cim_compressor #(
  parameter int unsigned NMACRO   = 8,
  parameter int unsigned ADC_BITS = 7
) (
  input  logic [NMACRO-1:0][ADC_BITS-1:0] code,   // code[p] = bit plane p
  output logic [ADC_BITS+NMACRO-1:0]      mac
);

  localparam int unsigned OW = ADC_BITS + NMACRO;

  always_comb begin
    mac = '0;
    for (int unsigned p = 0; p < NMACRO; p++) mac = mac + (OW'(code[p]) << p);
  end

endmodule
