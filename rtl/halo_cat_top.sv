// halo_cat_top -- HALO-CAT activation-localized CIM hidden-network processor.
//
// Three 16KB CIM cores hold the activations of one tile and compute on them
// in place. For each layer one core is the input (iCIM): its stored
// activations are multiplied by weights that WGEN generates and WBUF masks
// with the supermask from MMEM. The NMP shifts, accumulates and
// post-processes the MAC outputs and writes the results straight into
// another core, the output (oCIM). The next layer uses that core as its
// iCIM, so activations never travel to a separate buffer. The third core
// holds the shortcut of a residual connection. TMEM parks tiles for tile
// concatenation. The top control runs a program from IMEM.
//
// Host interface (this design's own; the paper does not describe one): while
// busy is low the host may write IMEM (host_imem_*), MMEM (host_mmem_*), and
// read or write core words (host_core_*: one 64-bit word = 8 pixels x 8 bit
// of one row and cluster; read data on host_core_rdata one clock later) and
// read TMEM (host_tm_*; the paper's SIMD unit, whose function is not given,
// would sit there). A one-clock start pulse runs the program from IMEM word 0;
// done rises at its END instruction and busy falls.
module halo_cat_top
  import halo_cat_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // host: instruction and supermask load
  input  logic                          host_imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] host_imem_addr,
  input  logic [127:0]                  host_imem_wdata,
  input  logic                          host_mmem_we,
  input  logic [$clog2(MMEM_DEPTH)-1:0] host_mmem_addr,
  input  logic [NCLUSTER-1:0]           host_mmem_wdata,
  // host: core word access (when not busy)
  input  logic                          host_core_en,
  input  logic                          host_core_we,
  input  logic [1:0]                    host_core_sel,
  input  logic [$clog2(NROW)-1:0]       host_core_row,
  input  logic [$clog2(NCLUSTER)-1:0]   host_core_cluster,
  input  logic [WORD_BITS-1:0]          host_core_wdata,
  input  logic [NGROUP-1:0]             host_core_gmask,
  output logic [WORD_BITS-1:0]          host_core_rdata,
  // host / SIMD: TMEM read (when not busy)
  input  logic                          host_tm_re,
  input  logic [$clog2(TMEM_DEPTH)-1:0] host_tm_raddr,
  output logic [WORD_BITS-1:0]          host_tm_rdata
);

  // ------------------------------------------------------------- controller
  logic                          imem_re;
  logic [$clog2(IMEM_DEPTH)-1:0] imem_raddr;
  logic [127:0]                  imem_rdata;
  logic                          mmem_re;
  logic [$clog2(MMEM_DEPTH)-1:0] mmem_raddr;
  logic [NCLUSTER-1:0]           mmem_rdata;
  logic [11:0]                   wg_seed;
  logic [11:0]                   wg_oc;
  logic [5:0]                    wg_kpos;
  logic [3:0]                    wg_chunk;
  logic [NCLUSTER-1:0]           wg_sign;
  logic                          wb_load, wb_neg;
  logic [2:0]                    wb_slot_lg;
  logic [$clog2(NCLUSTER)-1:0]   wb_slot_off;
  logic [NCLUSTER-1:0]           weight;
  logic                          mac_en;
  logic [1:0]                    mac_core;
  logic [$clog2(NROW)-1:0]       mac_row;
  logic                          a_en, b_en;
  logic [1:0]                    a_core, b_core;
  logic [$clog2(NROW)-1:0]       a_row, b_row;
  logic [$clog2(NCLUSTER)-1:0]   a_cluster, b_cluster;
  cword_t                        a_rdata, b_wdata;
  logic [NGROUP-1:0]             b_gmask;
  logic                          tm_we, tm_re;
  logic [$clog2(TMEM_DEPTH)-1:0] tm_waddr, tm_raddr;
  cword_t                        tm_wdata, tm_rdata;
  logic                          nmp_clear, nmp_acc_en, nmp_neg, nmp_post_en, nmp_res_en;
  logic signed [3:0]             nmp_sh;
  logic [3:0]                    nmp_tile_w;
  logic [7:0]                    nmp_scale;
  logic [4:0]                    nmp_shift;
  logic signed [15:0]            nmp_bias;
  logic [NGROUP-1:0][7:0]        nmp_res, nmp_out;
  logic                          nmp_out_valid;

  top_ctrl u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .imem_re, .imem_raddr, .imem_rdata(instr_t'(imem_rdata)),
    .mmem_re, .mmem_raddr,
    .wg_seed, .wg_oc, .wg_kpos, .wg_chunk, .wb_load, .wb_neg, .wb_slot_lg, .wb_slot_off,
    .mac_en, .mac_core, .mac_row,
    .a_en, .a_core, .a_row, .a_cluster, .a_rdata,
    .b_en, .b_core, .b_row, .b_cluster, .b_wdata, .b_gmask,
    .tm_we, .tm_waddr, .tm_wdata, .tm_re, .tm_raddr, .tm_rdata,
    .nmp_clear, .nmp_acc_en, .nmp_sh, .nmp_neg, .nmp_tile_w, .nmp_post_en,
    .nmp_scale, .nmp_shift, .nmp_bias, .nmp_res_en, .nmp_res,
    .nmp_out_valid, .nmp_out
  );

  // --------------------------------------------------------------- memories
  imem u_imem (
    .clk, .we(host_imem_we && !busy), .waddr(host_imem_addr), .wdata(host_imem_wdata),
    .re(imem_re), .raddr(imem_raddr), .rdata(imem_rdata)
  );

  mmem u_mmem (
    .clk, .we(host_mmem_we && !busy), .waddr(host_mmem_addr), .wdata(host_mmem_wdata),
    .re(mmem_re), .raddr(mmem_raddr), .rdata(mmem_rdata)
  );

  tmem u_tmem (
    .clk, .we(tm_we), .waddr(tm_waddr), .wdata(tm_wdata),
    .re(busy ? tm_re : host_tm_re), .raddr(busy ? tm_raddr : host_tm_raddr), .rdata(tm_rdata)
  );
  assign host_tm_rdata = tm_rdata;

  // ------------------------------------------------------ weight generation
  wgen #(.NOUT(NCLUSTER)) u_wgen (
    .seed(16'(wg_seed)), .oc(wg_oc), .kpos(wg_kpos), .chunk(wg_chunk), .sign(wg_sign)
  );

  wbuf #(.N(NCLUSTER)) u_wbuf (
    .clk, .load(wb_load), .neg(wb_neg), .mask(mmem_rdata), .sign(wg_sign),
    .slot_lg(wb_slot_lg), .slot_off(wb_slot_off), .weight(weight)
  );

  // -------------------------------------------------------------- CIM cores
  logic [NCORE-1:0][NGROUP-1:0][MAC_BITS-1:0] core_mac;
  cword_t [NCORE-1:0]                          core_rdata;
  logic [1:0]                                  rd_core_q;   // core read last clock
  logic [1:0]                                  mac_core_q;  // core of the MAC in flight

  for (genvar i = 0; i < int'(NCORE); i++) begin : g_core
    logic                        d_en, d_we;
    logic [$clog2(NROW)-1:0]     d_row;
    logic [$clog2(NCLUSTER)-1:0] d_cl;
    cword_t                      d_wdata;
    logic [NGROUP-1:0]           d_gmask;

    // port arbitration: controller write, controller read, host
    always_comb begin
      d_en = 1'b0; d_we = 1'b0; d_row = a_row; d_cl = a_cluster;
      d_wdata = b_wdata; d_gmask = b_gmask;
      if (!busy) begin
        d_en    = host_core_en && (host_core_sel == 2'(i));
        d_we    = host_core_we;
        d_row   = host_core_row;
        d_cl    = host_core_cluster;
        d_wdata = host_core_wdata;
        d_gmask = host_core_gmask;
      end else if (b_en && b_core == 2'(i)) begin
        d_en = 1'b1; d_we = 1'b1; d_row = b_row; d_cl = b_cluster;
      end else if (a_en && a_core == 2'(i)) begin
        d_en = 1'b1;
      end
    end

    cim_core u_core (
      .clk,
      .mac_en     (mac_en && mac_core == 2'(i)),
      .mac_row    (mac_row),
      .weight     (weight),
      .mac        (core_mac[i]),
      .dig_en     (d_en),
      .dig_we     (d_we),
      .dig_row    (d_row),
      .dig_cluster(d_cl),
      .dig_wdata  (d_wdata),
      .dig_gmask  (d_gmask),
      .dig_rdata  (core_rdata[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_core_q  <= '0;
      mac_core_q <= '0;
    end else begin
      rd_core_q  <= busy ? a_core : host_core_sel;
      mac_core_q <= mac_core;
    end
  end

  assign a_rdata         = core_rdata[rd_core_q];
  assign host_core_rdata = core_rdata[rd_core_q];

  // ------------------------------------------------------------------- NMP
  nmp u_nmp (
    .clk, .rst_n,
    .clear(nmp_clear), .acc_en(nmp_acc_en), .mac(core_mac[mac_core_q]),
    .sh(nmp_sh), .neg(nmp_neg), .tile_w(nmp_tile_w),
    .post_en(nmp_post_en), .scale(nmp_scale), .shift(nmp_shift), .bias(nmp_bias),
    .res_en(nmp_res_en), .res(nmp_res),
    .out_valid(nmp_out_valid), .out(nmp_out)
  );

endmodule
