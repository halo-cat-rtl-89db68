// tb_halo_cat_top -- end-to-end test of the HALO-CAT processor at its
// default (full) size.
//
// The host clears the three cores, loads an 8x8 input tile with 256 channels
// (two 128-channel chunks per pixel) into core 0, loads supermasks (about
// 30% ones, i.e. 70% sparsity) and a program that runs a small bottleneck
// block followed by a tile-concatenation step:
//   I0  CONV 1x1  core0 -> core1   256 -> 8 ch     (deep channels, 2 chunks;
//                                                   output packed 8 ch/pixel)
//   I1  CONV 3x3  core1 -> core2     8 -> 8 ch     (in-tile zero padding;
//                                                   packed in 8, packed out 16)
//   I2  CONV 1x1  core2 -> core1     8 -> 256 ch   + shortcut from core0
//                                                  (packed input, 16 ch slots)
//   I3  CONV 3x3/2 core1 -> core0  256 -> 8 ch     (stride 2, 8x8 -> 4x4)
//   I4  TSAVE core0 rows 0..3 -> TMEM
//   I5  TLOAD TMEM -> core2, groups 4..7          (tile concatenation)
//   I6  END
// The iCIM/oCIM roles rotate over all three cores. A reference model here
// (its own weight generator, bit-plane MAC with 7-bit saturation, MAC shift,
// post-processing) computes every core word; all 3 x 16 x 128 words are read
// back and compared. The run time is checked against the controller's
// documented schedule: 1 clock to take start, 2 per instruction fetch, 6 + 2*K*K*chunks per
// output row of a CONV, 1 + 128*rows for a copy. Each mechanism (1x1 and 3x3
// kernels, padding bubbles, deep-channel chunks, stride 2, shortcut add,
// multi-chunk output, packed input and output pixels, role rotation, tile
// save/load, clamping at 0 and 255)
// is counted and must occur.
module tb_halo_cat_top;
  import halo_cat_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, start = 0, busy, done;
  logic host_imem_we = 0, host_mmem_we = 0;
  logic [10:0] host_imem_addr = '0, host_mmem_addr = '0;
  logic [127:0] host_imem_wdata = '0, host_mmem_wdata = '0;
  logic host_core_en = 0, host_core_we = 0;
  logic [1:0] host_core_sel = '0;
  logic [3:0] host_core_row = '0;
  logic [6:0] host_core_cluster = '0;
  logic [63:0] host_core_wdata = '0, host_core_rdata;
  logic [7:0] host_core_gmask = '1;
  logic host_tm_re = 0;
  logic [11:0] host_tm_raddr = '0;
  logic [63:0] host_tm_rdata;

  halo_cat_top dut (.*);

  // ------------------------------------------------------------ reference
  logic [7:0]   mc [3][16][128][8];   // core, row, cluster, group
  logic [63:0]  mt [TMEM_DEPTH];
  logic [127:0] mm [MMEM_DEPTH];
  instr_t prog [8];
  int n_prog;
  longint exp_cycles;

  // mechanism counters (from the reference run)
  int c_k1 = 0, c_k3 = 0, c_bubble = 0, c_chunk = 0, c_stride = 0, c_res = 0;
  int c_ochunk = 0, c_tsave = 0, c_tload = 0, c_lo = 0, c_hi = 0;
  int c_pin = 0, c_pout = 0;
  bit icim_used [3];

  function automatic logic [127:0] ref_wgen(logic [15:0] s, logic [11:0] o, logic [5:0] k, logic [3:0] c);
    logic [31:0] x;
    logic [127:0] r;
    x = {s, 16'h0} ^ {4'h0, o, k, c, 6'h0} ^ 32'h9E3779B9;
    if (x == 0) x = 1;
    for (int i = 0; i < 4; i++) begin
      x ^= x << 13; x ^= x >> 17; x ^= x << 5;
      r[32*i +: 32] = x;
    end
    return r;
  endfunction

  task automatic ref_conv(instr_t I);
    int K, pad, st, th, tw, chs, oh, ow, och, ish, osh;
    logic [7:0] outv [16][128][8];
    K = int'(I.ksize); pad = (K - 1) / 2; st = int'(I.stride);
    th = int'(I.tile_h); tw = int'(I.tile_w); chs = int'(I.cin_chunks);
    oh = (st == 2) ? (th + 1) / 2 : th;
    ow = (st == 2) ? (tw + 1) / 2 : tw;
    och = (int'(I.cout) + 127) / 128;
    icim_used[I.in_core] = 1;
    if (K == 1) c_k1++; else c_k3++;
    if (chs > 1) c_chunk++;
    if (st == 2) c_stride++;
    if (I.res_en) c_res++;
    if (och > 1) c_ochunk++;
    if (I.in_lg < 7) c_pin++;
    if (I.out_lg < 7) c_pout++;
    ish = 7 - int'(I.in_lg); osh = 7 - int'(I.out_lg);
    exp_cycles += 2 + longint'(I.cout) * oh * (6 + 2 * K * K * chs);
    for (int oc = 0; oc < int'(I.cout); oc++) begin
      for (int ho = 0; ho < oh; ho++) begin
        longint acc [8];
        int orow, ocl;
        for (int w = 0; w < 8; w++) acc[w] = 0;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            for (int ch = 0; ch < chs; ch++)
              for (int ph = 0; ph < 2; ph++) begin
                int hi, kpos, addr, irow;
                logic [127:0] sg, wt;
                int mac [8];
                hi = ho * st + ky - pad;
                if (hi < 0 || hi >= th) begin c_bubble++; continue; end
                kpos = ky * K + kx;
                addr = (int'(I.mask_base) + (oc * K * K + kpos) * chs + ch) % MMEM_DEPTH;
                sg = ref_wgen(I.seed, 12'(oc), 6'(kpos), 4'(ch));
                wt = ph ? (mm[addr] & sg) : (mm[addr] & ~sg);
                if (ish > 0) begin   // packed input: slot of pixel row hi
                  wt = wt & ((128'(1) << (1 << int'(I.in_lg))) - 1);
                  wt = wt << ((hi % (1 << ish)) << int'(I.in_lg));
                end
                irow = (hi >> ish) * chs + ch;
                for (int j = 0; j < 8; j++) begin
                  mac[j] = 0;
                  for (int p = 0; p < 8; p++) begin
                    int n = 0;
                    for (int c = 0; c < 128; c++) n += int'(mc[I.in_core][irow][c][j][p] & wt[c]);
                    if (n > 127) n = 127;
                    mac[j] += n << p;
                  end
                end
                for (int w = 0; w < 8; w++) begin
                  int s;
                  s = w + kx - pad;
                  if (s >= 0 && s < tw) acc[w] += ph ? -longint'(mac[s]) : longint'(mac[s]);
                end
              end
        orow = (ho >> osh) * och + oc / 128;
        ocl = ((ho % (1 << osh)) << int'(I.out_lg)) + oc % 128;
        for (int j = 0; j < ow; j++) begin
          longint v;
          int w;
          w = j * st;
          v = (acc[w] * longint'(I.scale)) >>> I.shift;
          v += longint'(I.bias);
          if (I.res_en) v += longint'(mc[I.res_core][orow][ocl][w]);
          if (v < 0) begin v = 0; c_lo++; end
          else if (v > 255) begin v = 255; c_hi++; end
          outv[orow][ocl][j] = 8'(v);
        end
      end
    end
    // commit after the whole layer (in and out cores differ)
    for (int oc = 0; oc < int'(I.cout); oc++)
      for (int ho = 0; ho < oh; ho++)
        for (int j = 0; j < ow; j++) begin
          int orow, ocl;
          orow = (ho >> osh) * och + oc / 128;
          ocl = ((ho % (1 << osh)) << int'(I.out_lg)) + oc % 128;
          mc[I.out_core][orow][ocl][j] = outv[orow][ocl][j];
        end
  endtask

  task automatic ref_run();
    exp_cycles = 1;   // the clock in which start is taken
    for (int i = 0; i < n_prog; i++) begin
      instr_t I;
      I = prog[i];
      case (I.op)
        OP_CONV: ref_conv(I);
        OP_TSAVE: begin
          exp_cycles += 2 + 1 + 128 * longint'(I.t_rows);
          for (int r = 0; r < int'(I.t_rows); r++)
            for (int c = 0; c < 128; c++) begin
              for (int g = 0; g < 8; g++) mt[int'(I.tm_base) + r * 128 + c][8*g +: 8] = mc[I.in_core][r][c][g];
              c_tsave++;
            end
        end
        OP_TLOAD: begin
          exp_cycles += 2 + 1 + 128 * longint'(I.t_rows);
          for (int r = 0; r < int'(I.t_rows); r++)
            for (int c = 0; c < 128; c++) begin
              for (int g = 0; g < int'(I.tile_w); g++)
                if (g + int'(I.t_gshift) < 8)
                  mc[I.out_core][r + int'(I.t_rowoff)][c][g + int'(I.t_gshift)] = mt[int'(I.tm_base) + r * 128 + c][8*g +: 8];
              c_tload++;
            end
        end
        default: exp_cycles += 2;   // END
      endcase
    end
  endtask

  // ------------------------------------------------------------ host tasks
  task automatic core_write(int core, int row, int cl, logic [63:0] d);
    @(negedge clk);
    host_core_en = 1; host_core_we = 1; host_core_sel = 2'(core);
    host_core_row = 4'(row); host_core_cluster = 7'(cl); host_core_wdata = d; host_core_gmask = '1;
    @(negedge clk);
    host_core_en = 0; host_core_we = 0;
  endtask

  task automatic core_read(int core, int row, int cl, output logic [63:0] d);
    @(negedge clk);
    host_core_en = 1; host_core_we = 0; host_core_sel = 2'(core);
    host_core_row = 4'(row); host_core_cluster = 7'(cl);
    @(negedge clk);
    host_core_en = 0;
    d = host_core_rdata;
  endtask

  function automatic instr_t conv(int ic, int oc_, int k, int st, int chs, int cout, int mbase,
                                  int sc, int sh, int bias, int seed);
    instr_t I;
    I = '0;
    I.op = OP_CONV; I.in_core = 2'(ic); I.out_core = 2'(oc_); I.ksize = 3'(k); I.stride = 2'(st);
    I.tile_w = 4'd8; I.tile_h = 5'd8; I.cin_chunks = 5'(chs); I.cout = 12'(cout);
    I.mask_base = 11'(mbase); I.scale = 8'(sc); I.shift = 5'(sh); I.bias = 16'(bias); I.seed = 12'(seed);
    I.in_lg = 3'd7; I.out_lg = 3'd7;
    return I;
  endfunction

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ test
  initial begin
    longint t0, cycles;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // clear all cores
    for (int k = 0; k < 3; k++)
      for (int r = 0; r < 16; r++)
        for (int c = 0; c < 128; c++) begin
          core_write(k, r, c, '0);
          for (int g = 0; g < 8; g++) mc[k][r][c][g] = '0;
        end
    // input tile: 8x8 pixels, 256 channels, row = h*2 + chunk
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 128; c++) begin
        logic [63:0] d;
        d = {$urandom, $urandom};
        core_write(0, r, c, d);
        for (int g = 0; g < 8; g++) mc[0][r][c][g] = d[8*g +: 8];
      end

    // program
    prog[0] = conv(0, 1, 1, 1, 2, 8,   0,   1, 3, 20,  12'h101);
    prog[0].out_lg = 3'd3;
    prog[1] = conv(1, 2, 3, 1, 1, 8,   16,  1, 1, 40,  12'h102);
    prog[1].in_lg = 3'd3; prog[1].out_lg = 3'd4;
    prog[2] = conv(2, 1, 1, 1, 1, 256, 88,  2, 2, 0,   12'h103);
    prog[2].in_lg = 3'd4;
    prog[2].res_en = 1; prog[2].res_core = 2'd0;
    prog[3] = conv(1, 0, 3, 2, 2, 8,   344, 1, 5, 60,  12'h104);
    prog[4] = '0; prog[4].op = OP_TSAVE; prog[4].in_core = 2'd0; prog[4].t_rows = 5'd4; prog[4].tm_base = 12'd512;
    prog[5] = '0; prog[5].op = OP_TLOAD; prog[5].out_core = 2'd2; prog[5].t_rows = 5'd4; prog[5].tm_base = 12'd512;
    prog[5].tile_w = 4'd4; prog[5].t_gshift = 3'd4; prog[5].t_rowoff = 5'd0;
    prog[6] = '0; prog[6].op = OP_END;
    n_prog = 7;

    // supermasks: ~30% density; only real input channels carry mask bits
    for (int a = 0; a < MMEM_DEPTH; a++) begin
      logic [127:0] m;
      for (int b = 0; b < 128; b++) m[b] = ($urandom_range(0, 99) < 30);
      if ((a >= 16 && a < 88) || (a >= 88 && a < 344)) m[127:8] = '0;   // layers with 8 input channels
      mm[a] = m;
    end
    for (int a = 0; a < 488; a++) begin
      @(negedge clk); host_mmem_we = 1; host_mmem_addr = 11'(a); host_mmem_wdata = mm[a];
    end
    for (int i = 0; i < n_prog; i++) begin
      @(negedge clk); host_imem_we = 1; host_imem_addr = 11'(i); host_imem_wdata = prog[i];
    end
    @(negedge clk); host_mmem_we = 0; host_imem_we = 0;

    ref_run();

    // run
    @(negedge clk); start = 1;
    t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (cycles != exp_cycles) begin
      failures++; $display("run took %0d clocks, schedule says %0d", cycles, exp_cycles);
    end
    $display("program ran in %0d clocks", cycles);

    // compare every word of every core
    for (int k = 0; k < 3; k++)
      for (int r = 0; r < 16; r++)
        for (int c = 0; c < 128; c++) begin
          logic [63:0] d, e;
          core_read(k, r, c, d);
          for (int g = 0; g < 8; g++) e[8*g +: 8] = mc[k][r][c][g];
          checks++;
          if (d !== e) begin
            failures++;
            if (failures < 20) $display("core %0d row %0d cl %0d: got %h exp %h", k, r, c, d, e);
          end
        end
    // TMEM holds the saved tile
    for (int a = 512; a < 512 + 4 * 128; a += 37) begin
      @(negedge clk); host_tm_re = 1; host_tm_raddr = 12'(a);
      @(negedge clk); host_tm_re = 0;
      checks++;
      if (host_tm_rdata !== mt[a]) begin failures++; $display("tmem %0d mismatch", a); end
    end

    $display("mechanisms: k1=%0d k3=%0d bubbles=%0d chunked=%0d stride2=%0d shortcut=%0d multi_out_chunk=%0d packed_in=%0d packed_out=%0d tsave=%0d tload=%0d clamp0=%0d clamp255=%0d icim={%0d,%0d,%0d}",
             c_k1, c_k3, c_bubble, c_chunk, c_stride, c_res, c_ochunk, c_pin, c_pout, c_tsave, c_tload, c_lo, c_hi,
             icim_used[0], icim_used[1], icim_used[2]);
    checks++;
    if (c_k1 == 0 || c_k3 == 0 || c_bubble == 0 || c_chunk == 0 || c_stride == 0 || c_res == 0 ||
        c_ochunk == 0 || c_pin == 0 || c_pout == 0 || c_tsave == 0 || c_tload == 0 || c_lo == 0 || c_hi == 0 ||
        !(icim_used[0] && icim_used[1] && icim_used[2])) begin
      failures++; $display("a mechanism was not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
