// cim_core -- one 16KB activation-localized CIM core.
//
// Eight CIM groups, one per tile column (W). Each group has eight macros, one
// per activation bit plane (P, macro p holds bit p), and a compressor. Each
// macro has 128 clusters (channels C) of 16 SRAM rows (tile rows H).
// Activation (w, h, c) with 8 bits is stored at group w, bit p in macro p,
// cluster c mod 128, row h*chunks + c/128 (a pixel with more than 128
// channels spans several rows; the controller computes the row).
//
// MAC mode: mac_en activates row mac_row in all 64 macros and broadcasts the
// 128-bit weight vector to all of them. One clock later mac[w] holds, for
// every tile column w in parallel, sum_c act(w,row,c) * weight[c] (bit planes
// recombined by the compressor; each bit plane saturates at the ADC range).
//
// Digital port: one 64-bit word = the eight 8-bit pixels of one (row,
// cluster), byte w belonging to group w. dig_we with dig_gmask[w] writes byte
// w; a read returns the whole word on dig_rdata one clock later. The core is
// used as iCIM (MAC), as oCIM (written by the NMP through this port) or as the
// residual store (read through this port) depending on the instruction; this
// role switching follows the paper, the port format is this design's own.
module cim_core
  import halo_cat_pkg::*;
#(
  parameter int unsigned NG = NGROUP,
  parameter int unsigned NP = NMACRO,
  parameter int unsigned NC = NCLUSTER,
  parameter int unsigned NR = NROW,
  parameter int unsigned AB = ADC_BITS
) (
  input  logic                         clk,
  // MAC mode
  input  logic                         mac_en,
  input  logic [$clog2(NR)-1:0]        mac_row,
  input  logic [NC-1:0]                weight,
  output logic [NG-1:0][AB+NP-1:0]     mac,
  // digital port
  input  logic                         dig_en,
  input  logic                         dig_we,
  input  logic [$clog2(NR)-1:0]        dig_row,
  input  logic [$clog2(NC)-1:0]        dig_cluster,
  input  logic [NG-1:0][NP-1:0]        dig_wdata,
  input  logic [NG-1:0]                dig_gmask,
  output logic [NG-1:0][NP-1:0]        dig_rdata
);

  for (genvar g = 0; g < NG; g++) begin : g_group
    logic [NP-1:0][AB-1:0] code;

    for (genvar p = 0; p < NP; p++) begin : g_macro
      cim_macro #(.NCLUSTER(NC), .NROW(NR), .ADC_BITS(AB)) u_macro (
        .clk         (clk),
        .mac_en      (mac_en),
        .mac_row     (mac_row),
        .weight      (weight),
        .mac_code    (code[p]),
        .dig_en      (dig_en && (!dig_we || dig_gmask[g])),
        .dig_we      (dig_we),
        .dig_row     (dig_row),
        .dig_cluster (dig_cluster),
        .dig_wbit    (dig_wdata[g][p]),
        .dig_rbit    (dig_rdata[g][p])
      );
    end

    cim_compressor #(.NMACRO(NP), .ADC_BITS(AB)) u_comp (
      .code (code),
      .mac  (mac[g])
    );
  end

endmodule
