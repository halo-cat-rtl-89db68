// tb_top_ctrl -- self-checking test of the top controller on its own.
//
// The testbench plays IMEM (one-clock read), the NMP (out_valid one clock
// after post_en, lane j = 16*row_count + j), a core read port and TMEM (data
// derived from the address read one clock earlier). It runs
//   CONV 3x3, stride 1, 4x4 tile, 2 chunks, 3 output channels, output
//        packed 4 clusters per pixel
//   CONV 1x1, stride 2, 8x8 tile, 1 chunk, 130 output channels, shortcut on,
//        input packed 4 clusters per pixel
//   TSAVE 2 rows, TLOAD 2 rows (tile_w 3, group shift 2, row offset 5), END
// and compares, in order, every MMEM address, every MAC row, every NMP
// accumulate (shift, sign), every WBUF slot offset, every core write (core, row, cluster, group mask,
// data after stride compaction or group shift), every TMEM write and every
// shortcut read with sequences generated here from the schedule. Also checks
// the total clock count and that done rises.
module tb_top_ctrl;
  import halo_cat_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, start = 0, busy, done;
  logic imem_re; logic [10:0] imem_raddr; instr_t imem_rdata;
  logic mmem_re; logic [10:0] mmem_raddr;
  logic [11:0] wg_seed; logic [11:0] wg_oc; logic [5:0] wg_kpos; logic [3:0] wg_chunk;
  logic [2:0] wb_slot_lg; logic [6:0] wb_slot_off;
  logic wb_load, wb_neg, mac_en; logic [1:0] mac_core; logic [3:0] mac_row;
  logic a_en, b_en; logic [1:0] a_core, b_core; logic [3:0] a_row, b_row;
  logic [6:0] a_cluster, b_cluster; cword_t a_rdata, b_wdata; logic [7:0] b_gmask;
  logic tm_we, tm_re; logic [11:0] tm_waddr, tm_raddr; cword_t tm_wdata, tm_rdata;
  logic nmp_clear, nmp_acc_en, nmp_neg, nmp_post_en, nmp_res_en;
  logic signed [3:0] nmp_sh; logic [3:0] nmp_tile_w; logic [7:0] nmp_scale; logic [4:0] nmp_shift;
  logic signed [15:0] nmp_bias; logic [7:0][7:0] nmp_res, nmp_out; logic nmp_out_valid;

  top_ctrl dut (.*);

  instr_t prog [8];
  int posts = 0;

  // environment models
  always_ff @(posedge clk) begin
    if (imem_re) imem_rdata <= prog[imem_raddr[2:0]];
    nmp_out_valid <= nmp_post_en;
    if (nmp_post_en) begin
      for (int j = 0; j < 8; j++) nmp_out[j] <= 8'(16 * (posts % 16) + j);
      posts <= posts + 1;
    end
    if (a_en) a_rdata <= {32'hA000_0000 | 32'({a_core, a_row, a_cluster}), 32'h5555_0000 | 32'(a_cluster)};
    if (tm_re) tm_rdata <= {52'h0, tm_raddr};
  end

  // expected event queues
  int q_mm[$], q_row[$], q_acc[$], q_tmw[$], q_res[$], q_off[$];
  longint q_bw[$];
  cword_t q_bd[$];
  longint exp_cycles;
  int posts_exp = 0;

  function automatic longint pack_b(int core, int row, int cl, int gm);
    return longint'(core) << 40 | longint'(row) << 32 | longint'(cl) << 16 | longint'(gm);
  endfunction

  task automatic expect_conv(instr_t I);
    int K, pad, st, oh, ow, och, chs, ish, osh;
    K = int'(I.ksize); pad = (K - 1) / 2; st = int'(I.stride); chs = int'(I.cin_chunks);
    oh = (st == 2) ? (int'(I.tile_h) + 1) / 2 : int'(I.tile_h);
    ow = (st == 2) ? (int'(I.tile_w) + 1) / 2 : int'(I.tile_w);
    och = (int'(I.cout) + 127) / 128;
    ish = 7 - int'(I.in_lg); osh = 7 - int'(I.out_lg);
    exp_cycles += 2 + longint'(I.cout) * oh * (6 + 2 * K * K * chs);
    for (int oc = 0; oc < int'(I.cout); oc++)
      for (int ho = 0; ho < oh; ho++) begin
        int orow, ocl;
        cword_t d;
        for (int ky = 0; ky < K; ky++)
          for (int kx = 0; kx < K; kx++)
            for (int ch = 0; ch < chs; ch++)
              for (int ph = 0; ph < 2; ph++) begin
                int hi;
                hi = ho * st + ky - pad;
                q_mm.push_back((int'(I.mask_base) + (oc * K * K + ky * K + kx) * chs + ch) % 2048);
                if (hi >= 0 && hi < int'(I.tile_h)) begin
                  q_row.push_back((hi >> ish) * chs + ch);
                  q_off.push_back((hi % (1 << ish)) << int'(I.in_lg));
                  q_acc.push_back((kx - pad) * 2 + ph);
                end
              end
        orow = (ho >> osh) * och + oc / 128;
        ocl = ((ho % (1 << osh)) << int'(I.out_lg)) + oc % 128;
        if (I.res_en) q_res.push_back(int'({I.res_core, 4'(orow), 7'(ocl)}));
        d = '0;
        for (int j = 0; j < ow; j++) d[8*j +: 8] = 8'(16 * (posts_exp % 16) + j * st);
        posts_exp++;
        q_bw.push_back(pack_b(int'(I.out_core), orow, ocl, (1 << ow) - 1));
        q_bd.push_back(d);
      end
  endtask
  task automatic expect_copy(instr_t I);
    exp_cycles += 3 + 128 * longint'(I.t_rows);
    for (int r = 0; r < int'(I.t_rows); r++)
      for (int c = 0; c < 128; c++) begin
        int ta;
        ta = int'(I.tm_base) + r * 128 + c;
        if (I.op == OP_TSAVE) q_tmw.push_back(ta);
        else begin
          q_bw.push_back(pack_b(int'(I.out_core), r + int'(I.t_rowoff), c,
                                (((1 << int'(I.tile_w)) - 1) << I.t_gshift) & 8'hFF));
          q_bd.push_back(64'(ta) << (8 * int'(I.t_gshift)));
        end
      end
  endtask

  // monitors
  always @(negedge clk) if (rst_n) begin
    if (mmem_re) begin
      checks++;
      if (q_mm.size() == 0 || q_mm[0] != int'(mmem_raddr)) begin failures++; $display("mmem addr %0d unexpected", mmem_raddr); end
      if (q_mm.size() != 0) void'(q_mm.pop_front());
    end
    if (wb_load) begin
      checks++;
      if (q_off.size() == 0 || q_off[0] != int'(wb_slot_off) || wb_slot_lg != dut.ins.in_lg) begin
        failures++; $display("wbuf slot offset %0d unexpected", wb_slot_off);
      end
      if (q_off.size() != 0) void'(q_off.pop_front());
    end
    if (mac_en) begin
      checks++;
      if (q_row.size() == 0 || q_row[0] != int'(mac_row)) begin failures++; $display("mac row %0d unexpected", mac_row); end
      if (q_row.size() != 0) void'(q_row.pop_front());
    end
    if (nmp_acc_en) begin
      checks++;
      if (q_acc.size() == 0 || q_acc[0] != int'(nmp_sh) * 2 + int'(nmp_neg)) begin failures++; $display("acc sh=%0d neg=%0d unexpected", nmp_sh, nmp_neg); end
      if (q_acc.size() != 0) void'(q_acc.pop_front());
    end
    if (a_en && dut.state == dut.S_DRAIN) begin
      checks++;
      if (q_res.size() == 0 || q_res[0] != int'({a_core, a_row, a_cluster})) begin failures++; $display("shortcut read unexpected"); end
      if (q_res.size() != 0) void'(q_res.pop_front());
    end
    if (b_en) begin
      checks++;
      if (q_bw.size() == 0 || q_bw[0] != pack_b(int'(b_core), int'(b_row), int'(b_cluster), int'(b_gmask)) ||
          (q_bd[0] & gm64(b_gmask)) != (b_wdata & gm64(b_gmask))) begin
        failures++;
        if (failures < 10) $display("core write c%0d r%0d cl%0d gm%h d=%h unexpected (exp d=%h)", b_core, b_row, b_cluster, b_gmask, b_wdata, q_bd[0]);
      end
      if (q_bw.size() != 0) begin void'(q_bw.pop_front()); void'(q_bd.pop_front()); end
    end
    if (tm_we) begin
      checks++;
      if (q_tmw.size() == 0 || q_tmw[0] != int'(tm_waddr) ||
          tm_wdata[63:32] != (32'hA000_0000 | 32'({2'd1, 4'((tm_waddr - 12'd256) >> 7), tm_waddr[6:0]}))) begin
        failures++; $display("tmem write %0d unexpected", tm_waddr);
      end
      if (q_tmw.size() != 0) void'(q_tmw.pop_front());
    end
  end

  function automatic cword_t gm64(logic [7:0] gm);
    cword_t m;
    for (int g = 0; g < 8; g++) m[8*g +: 8] = {8{gm[g]}};
    return m;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, cycles;
    prog[0] = '0; prog[0].op = OP_CONV; prog[0].in_core = 0; prog[0].out_core = 1; prog[0].ksize = 3;
    prog[0].stride = 1; prog[0].tile_w = 4; prog[0].tile_h = 4; prog[0].cin_chunks = 2; prog[0].cout = 3;
    prog[0].mask_base = 11'd2040;   // wraps around the end of MMEM
    prog[0].in_lg = 3'd7; prog[0].out_lg = 3'd2;
    prog[1] = '0; prog[1].op = OP_CONV; prog[1].in_core = 1; prog[1].out_core = 2; prog[1].ksize = 1;
    prog[1].stride = 2; prog[1].tile_w = 8; prog[1].tile_h = 8; prog[1].cin_chunks = 1; prog[1].cout = 130;
    prog[1].res_en = 1; prog[1].res_core = 0; prog[1].mask_base = 11'd100;
    prog[1].in_lg = 3'd2; prog[1].out_lg = 3'd7;
    prog[2] = '0; prog[2].op = OP_TSAVE; prog[2].in_core = 1; prog[2].t_rows = 2; prog[2].tm_base = 12'd256;
    prog[3] = '0; prog[3].op = OP_TLOAD; prog[3].out_core = 0; prog[3].t_rows = 2; prog[3].tm_base = 12'd256;
    prog[3].tile_w = 3; prog[3].t_gshift = 2; prog[3].t_rowoff = 5;
    prog[4] = '0; prog[4].op = OP_END;
    exp_cycles = 1 + 2;
    expect_conv(prog[0]);
    expect_conv(prog[1]);
    expect_copy(prog[2]);
    expect_copy(prog[3]);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; t0 = $time;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = ($time - t0) / 10;
    checks++;
    if (cycles != exp_cycles) begin failures++; $display("took %0d clocks, expected %0d", cycles, exp_cycles); end
    checks++;
    if (q_mm.size() + q_row.size() + q_acc.size() + q_bw.size() + q_tmw.size() + q_res.size() + q_off.size() != 0) begin
      failures++; $display("events missing: mm %0d row %0d acc %0d bw %0d tm %0d res %0d",
                           q_mm.size(), q_row.size(), q_acc.size(), q_bw.size(), q_tmw.size(), q_res.size());
    end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("busy after END"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
