// top_ctrl -- top control of the HALO-CAT processor.
//
// Fetches 128-bit instructions (halo_cat_pkg::instr_t) from IMEM, starting at
// word 0 when start is pulsed, until an END instruction, which raises done.
//
// CONV (one layer of the layer-penetrative tile schedule). For every output
// channel oc and every output row ho the controller clears the NMP
// accumulators and issues one weight pass per clock, walking
//     ky (0..K-1) > kx (0..K-1) > chunk (0..cin_chunks-1) > sign (+, -)
// For each pass: input row hi = ho*stride + ky - (K-1)/2; a pass whose hi is
// outside the tile is issued as a bubble (block-convolution zero padding).
// The pass travels a three-stage pipeline:
//   issue   : MMEM read of word mask_base + (oc*K*K + ky*K+kx)*chunks + chunk
//   stage 1 : WGEN makes the random signs of that weight index, WBUF masks them
//   stage 2 : iCIM MAC on core row (see packing below)
//   stage 3 : NMP accumulates, MAC shifter offset kx - (K-1)/2, sign of pass
// After the last pass the pipeline drains (the residual core word is read
// meanwhile if res_en), the NMP post-processes, and the eight results are
// written to the oCIM. With stride 2 only the even NMP lanes are kept
// (lane 2j -> group j).
//
// Pixel packing. in_lg/out_lg give log2 of the clusters one pixel occupies
// in the input/output core. 7 means whole rows: pixel row h, chunk k sits at
// core row h*chunks + k, channel c at cluster c mod 128. Below 7 a layer has
// at most 2**lg channels and 2**(7-lg) pixel rows share one core row: pixel
// row h sits at core row h >> (7-lg), clusters starting at
// (h mod 2**(7-lg)) << lg. WBUF moves the weight vector to that slot; the
// output channel oc is written to cluster ((ho mod 2**(7-out_lg)) << out_lg)
// + oc. This follows the paper's remark that shallow layers store several
// pixels in one macro row; the exact slot layout is this design's choice.
//
// TSAVE copies t_rows rows x 128 clusters of core in_core into TMEM from
// tm_base on; TLOAD copies them back into core out_core, rows shifted by
// t_rowoff and groups by t_gshift, writing only the tile_w groups of the
// saved tile. Two TLOADs of halves of a tile thus build the concatenated tile
// of tile concatenation.
//
// The roles (which core is iCIM, oCIM, residual) come from the instruction,
// so they swap layer by layer as in the paper. The instruction set, the pass
// order, the pipeline and the stride handling are this design's own; the
// paper names the top control without describing it.
module top_ctrl
  import halo_cat_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // IMEM
  output logic                          imem_re,
  output logic [$clog2(IMEM_DEPTH)-1:0] imem_raddr,
  input  instr_t                        imem_rdata,
  // MMEM
  output logic                          mmem_re,
  output logic [$clog2(MMEM_DEPTH)-1:0] mmem_raddr,
  // WGEN index and WBUF control
  output logic [11:0]                   wg_seed,   // layer seed
  output logic [11:0]                   wg_oc,
  output logic [5:0]                    wg_kpos,
  output logic [3:0]                    wg_chunk,
  output logic                          wb_load,
  output logic                          wb_neg,
  output logic [2:0]                    wb_slot_lg,   // pixel-slot size of the input layer (in_lg)
  output logic [$clog2(NCLUSTER)-1:0]   wb_slot_off,  // first cluster of the pixel row being read
  // iCIM MAC
  output logic                          mac_en,
  output logic [1:0]                    mac_core,
  output logic [$clog2(NROW)-1:0]       mac_row,
  // core digital ports: A reads, B writes
  output logic                          a_en,
  output logic [1:0]                    a_core,
  output logic [$clog2(NROW)-1:0]       a_row,
  output logic [$clog2(NCLUSTER)-1:0]   a_cluster,
  input  cword_t                        a_rdata,   // rdata of core a_core, one clock after a_en
  output logic                          b_en,
  output logic [1:0]                    b_core,
  output logic [$clog2(NROW)-1:0]       b_row,
  output logic [$clog2(NCLUSTER)-1:0]   b_cluster,
  output cword_t                        b_wdata,
  output logic [NGROUP-1:0]             b_gmask,
  // TMEM
  output logic                          tm_we,
  output logic [$clog2(TMEM_DEPTH)-1:0] tm_waddr,
  output cword_t                        tm_wdata,
  output logic                          tm_re,
  output logic [$clog2(TMEM_DEPTH)-1:0] tm_raddr,
  input  cword_t                        tm_rdata,
  // NMP
  output logic                          nmp_clear,
  output logic                          nmp_acc_en,
  output logic signed [3:0]             nmp_sh,
  output logic                          nmp_neg,
  output logic [3:0]                    nmp_tile_w,
  output logic                          nmp_post_en,
  output logic [7:0]                    nmp_scale,
  output logic [4:0]                    nmp_shift,
  output logic signed [15:0]            nmp_bias,
  output logic                          nmp_res_en,
  output logic [NGROUP-1:0][7:0]        nmp_res,
  input  logic                          nmp_out_valid,
  input  logic [NGROUP-1:0][7:0]        nmp_out
);

  typedef enum logic [3:0] {
    S_IDLE, S_FETCH, S_DEC, S_ROW, S_ISSUE, S_DRAIN, S_POST, S_WRITE,
    S_COPY, S_COPY_END
  } state_e;

  // pipeline metadata of one weight pass
  typedef struct packed {
    logic                     valid;
    logic [$clog2(NROW)-1:0]  row;
    logic [$clog2(NCLUSTER)-1:0] off;
    logic signed [3:0]        koff;
    logic                     neg;
    logic [5:0]               kpos;
    logic [3:0]               chunk;
  } pass_t;

  state_e state;
  instr_t ins;
  logic [$clog2(IMEM_DEPTH)-1:0] pc;

  // loop counters
  logic [11:0] oc;
  logic [4:0]  ho;
  logic [2:0]  ky, kx;
  logic [3:0]  ch;
  logic        ph;
  logic [1:0]  drain;
  logic [4:0]  cr;                     // copy row
  logic [$clog2(NCLUSTER)-1:0] cc;     // copy cluster
  logic        copy_pend;              // copy read issued last clock
  logic [$clog2(NROW)-1:0]       cp_row;
  logic [$clog2(NCLUSTER)-1:0]   cp_cl;
  logic [$clog2(TMEM_DEPTH)-1:0] cp_taddr;
  logic        res_pend;
  logic [NGROUP-1:0][7:0] res_q;

  pass_t s1, s2, s3;

  // derived layer geometry
  logic [2:0]  pad;
  logic [5:0]  kk;
  logic [4:0]  out_h;
  logic [3:0]  out_w;
  logic [4:0]  out_chunks;
  always_comb begin
    pad        = (ins.ksize - 3'd1) >> 1;
    kk         = 6'(ins.ksize) * 6'(ins.ksize);
    out_h      = (ins.stride == 2'd2) ? 5'((ins.tile_h + 5'd1) >> 1) : ins.tile_h;
    out_w      = (ins.stride == 2'd2) ? 4'((ins.tile_w + 4'd1) >> 1) : ins.tile_w;
    out_chunks = 5'((13'(ins.cout) + 13'd127) >> 7);
  end

  // current pass (issue stage)
  pass_t cur;
  logic signed [6:0] hi;
  logic [5:0]        cur_kpos;
  logic [2:0]        in_sh;
  always_comb begin
    hi       = 7'(ho) * ((ins.stride == 2'd2) ? 7'sd2 : 7'sd1) + 7'(ky) - 7'(pad);
    cur_kpos = 6'(ky) * 6'(ins.ksize) + 6'(kx);
    cur.valid = (hi >= 0) && (hi < 7'(ins.tile_h));
    in_sh     = 3'd7 - ins.in_lg;
    cur.row   = 4'((hi >>> in_sh) * 7'(ins.cin_chunks) + 7'(ch));
    cur.off   = 7'((7'(hi) & ((7'd1 << in_sh) - 7'd1)) << ins.in_lg);
    cur.koff  = 4'(signed'({1'b0, kx}) - signed'({1'b0, pad}));
    cur.neg   = ph;
    cur.kpos  = cur_kpos;
    cur.chunk = ch;
  end

  logic last_pass;
  assign last_pass = ph && (ch == 4'(ins.cin_chunks - 5'd1)) &&
                     (kx == ins.ksize - 3'd1) && (ky == ins.ksize - 3'd1);

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins <= '0;
      pc <= '0;
      done <= 1'b0;
      {oc, ho, ky, kx, ch, ph, drain, cr, cc} <= '0;
      copy_pend <= 1'b0;
      cp_row <= '0; cp_cl <= '0; cp_taddr <= '0;
      res_pend <= 1'b0;
      res_q <= '0;
      s1 <= '0; s2 <= '0; s3 <= '0;
    end else begin
      // weight-pass pipeline
      s1 <= (state == S_ISSUE) ? cur : '0;
      s2 <= s1;
      s3 <= s2;

      if (res_pend) res_q <= a_rdata;
      res_pend <= 1'b0;

      copy_pend <= 1'b0;

      unique case (state)
        S_IDLE: if (start) begin
          pc <= '0;
          done <= 1'b0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DEC;
        S_DEC: begin
          ins <= imem_rdata;
          pc <= pc + 1'b1;
          oc <= '0; ho <= '0; cr <= '0; cc <= '0;
          unique case (imem_rdata.op)
            OP_CONV:  state <= S_ROW;
            OP_TSAVE, OP_TLOAD: state <= S_COPY;
            OP_END: begin
              done <= 1'b1;
              state <= S_IDLE;
            end
            default: state <= S_FETCH;   // unknown opcode: skipped
          endcase
        end
        S_ROW: begin
          {ky, kx, ch, ph} <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          ph <= ~ph;
          if (ph) begin
            if (ch == 4'(ins.cin_chunks - 5'd1)) begin
              ch <= '0;
              if (kx == ins.ksize - 3'd1) begin
                kx <= '0;
                ky <= ky + 3'd1;
              end else kx <= kx + 3'd1;
            end else ch <= ch + 4'd1;
          end
          if (last_pass) begin
            drain <= 2'd3;
            state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (drain == 2'd3) res_pend <= ins.res_en;
          drain <= drain - 2'd1;
          if (drain == 2'd1) state <= S_POST;
        end
        S_POST: state <= S_WRITE;
        S_WRITE: if (nmp_out_valid) begin
          if (ho == out_h - 5'd1) begin
            ho <= '0;
            if (oc == ins.cout - 12'd1) state <= S_FETCH;
            else begin
              oc <= oc + 12'd1;
              state <= S_ROW;
            end
          end else begin
            ho <= ho + 5'd1;
            state <= S_ROW;
          end
        end
        S_COPY: begin
          copy_pend <= 1'b1;
          cp_row   <= 4'(cr);
          cp_cl    <= cc;
          cp_taddr <= ins.tm_base + {cr[4:0], cc};
          cc <= cc + 1'b1;
          if (cc == '1) begin
            cr <= cr + 5'd1;
            if (cr == ins.t_rows - 5'd1) state <= S_COPY_END;
          end
        end
        S_COPY_END: state <= S_FETCH;   // last copy write happens this clock
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- outputs
  assign busy       = (state != S_IDLE);
  assign imem_re    = (state == S_FETCH);
  assign imem_raddr = pc;

  assign mmem_re    = (state == S_ISSUE);
  assign mmem_raddr = 11'(ins.mask_base + 11'((oc * 12'(kk) + 12'(cur_kpos)) * 12'(ins.cin_chunks) + 12'(ch)));

  assign wg_seed  = ins.seed;
  assign wg_oc    = oc;
  assign wg_kpos  = s1.kpos;
  assign wg_chunk = s1.chunk;
  assign wb_load  = s1.valid;
  assign wb_neg   = s1.neg;
  assign wb_slot_lg  = ins.in_lg;
  assign wb_slot_off = s1.off;

  assign mac_en   = s2.valid;
  assign mac_core = ins.in_core;
  assign mac_row  = s2.row;

  assign nmp_clear   = (state == S_ROW);
  assign nmp_acc_en  = s3.valid;
  assign nmp_sh      = s3.koff;
  assign nmp_neg     = s3.neg;
  assign nmp_tile_w  = ins.tile_w;
  assign nmp_post_en = (state == S_POST);
  assign nmp_scale   = ins.scale;
  assign nmp_shift   = ins.shift;
  assign nmp_bias    = ins.bias;
  assign nmp_res_en  = ins.res_en;
  assign nmp_res     = res_q;

  // output row of the current oc/ho in the oCIM / residual core
  logic [$clog2(NROW)-1:0]     orow;
  logic [$clog2(NCLUSTER)-1:0] ocl;
  logic [2:0]                  out_sh;
  always_comb begin
    out_sh = 3'd7 - ins.out_lg;
    orow   = 4'((ho >> out_sh) * out_chunks + 5'(oc >> 7));
    ocl    = 7'(((7'(ho) & ((7'd1 << out_sh) - 7'd1)) << ins.out_lg) + 7'(oc[6:0]));
  end

  // read port A: residual read (CONV) or copy source (TSAVE: core)
  always_comb begin
    a_en = 1'b0; a_core = ins.res_core; a_row = orow; a_cluster = ocl;
    if (state == S_DRAIN && drain == 2'd3 && ins.res_en) a_en = 1'b1;
    if (state == S_COPY && ins.op == OP_TSAVE) begin
      a_en = 1'b1; a_core = ins.in_core; a_row = 4'(cr); a_cluster = cc;
    end
  end

  // TMEM: TSAVE writes what port A read last clock; TLOAD reads
  assign tm_we    = copy_pend && (ins.op == OP_TSAVE);
  assign tm_waddr = cp_taddr;
  assign tm_wdata = a_rdata;
  assign tm_re    = (state == S_COPY) && (ins.op == OP_TLOAD);
  assign tm_raddr = ins.tm_base + {cr[4:0], cc};

  // write port B: NMP result (CONV) or TMEM data (TLOAD)
  logic [NGROUP-1:0] wmask;
  always_comb begin
    wmask = '0;
    for (int j = 0; j < int'(NGROUP); j++) wmask[j] = (j < int'(out_w));
  end

  always_comb begin
    b_en = 1'b0; b_core = ins.out_core; b_row = orow; b_cluster = ocl;
    b_wdata = '0; b_gmask = wmask;
    for (int j = 0; j < int'(NGROUP); j++) begin
      if (ins.stride == 2'd2) begin
        if (2 * j < int'(NGROUP)) b_wdata[8*j +: 8] = nmp_out[2*j];
      end else b_wdata[8*j +: 8] = nmp_out[j];
    end
    if (state == S_WRITE && nmp_out_valid) b_en = 1'b1;
    if (copy_pend && ins.op == OP_TLOAD) begin
      b_en      = 1'b1;
      b_row     = 4'(cp_row + ins.t_rowoff);
      b_cluster = cp_cl;
      b_wdata   = tm_rdata << (8 * ins.t_gshift);
      for (int j = 0; j < int'(NGROUP); j++) b_gmask[j] = (j < int'(ins.tile_w));
      b_gmask   = b_gmask << ins.t_gshift;
    end
  end

endmodule
