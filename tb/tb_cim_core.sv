// tb_cim_core -- self-checking test of one CIM core at full size.
// Writes random 8-pixel words to every (row, cluster), with some group write
// masks, reads a sample back, then runs MAC cycles on random rows with
// sparse random weights and with dense weights, and compares the eight MAC
// outputs with sum_p min(popcount(bit plane p AND weight), 127) * 2**p
// computed here from a shadow copy. MAC results must appear one clock later.
module tb_cim_core;
  import halo_cat_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mac_en = 0, dig_en = 0, dig_we = 0;
  logic [3:0] mac_row = 0, dig_row = 0;
  logic [6:0] dig_cluster = 0;
  logic [127:0] weight = '0;
  logic [7:0][14:0] mac;
  logic [7:0][7:0] dig_wdata = '0, dig_rdata;
  logic [7:0] dig_gmask = '1;
  logic [7:0] sh [16][128][8];   // shadow: row, cluster, group

  cim_core dut (.*);

  function automatic int ref_mac(int r, int g, logic [127:0] w);
    int s = 0;
    for (int p = 0; p < 8; p++) begin
      int n = 0;
      for (int c = 0; c < 128; c++) n += int'(sh[r][c][g][p] & w[c]);
      if (n > 127) n = 127;
      s += n << p;
    end
    return s;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word
    for (int r = 0; r < 16; r++)
      for (int c = 0; c < 128; c++) begin
        @(negedge clk); dig_en = 1; dig_we = 1; dig_row = 4'(r); dig_cluster = 7'(c); dig_gmask = '1;
        for (int g = 0; g < 8; g++) begin
          dig_wdata[g] = (r == 15) ? 8'hFF : 8'($urandom);
          sh[r][c][g] = dig_wdata[g];
        end
      end
    // partial writes with group masks
    for (int i = 0; i < 200; i++) begin
      int r, c;
      r = $urandom_range(0, 14); c = $urandom_range(0, 127);
      @(negedge clk); dig_en = 1; dig_we = 1; dig_row = 4'(r); dig_cluster = 7'(c);
      dig_gmask = 8'($urandom);
      for (int g = 0; g < 8; g++) begin
        dig_wdata[g] = 8'($urandom);
        if (dig_gmask[g]) sh[r][c][g] = dig_wdata[g];
      end
    end
    @(negedge clk); dig_en = 0; dig_we = 0;
    // read back
    for (int i = 0; i < 300; i++) begin
      int r, c;
      r = $urandom_range(0, 15); c = $urandom_range(0, 127);
      @(negedge clk); dig_en = 1; dig_row = 4'(r); dig_cluster = 7'(c);
      @(negedge clk); dig_en = 0;
      for (int g = 0; g < 8; g++) begin
        checks++;
        if (dig_rdata[g] !== sh[r][c][g]) begin failures++; $display("read mismatch r=%0d c=%0d g=%0d", r, c, g); end
      end
    end
    // MAC
    for (int i = 0; i < 150; i++) begin
      int r;
      logic [127:0] w;
      r = (i % 10 == 0) ? 15 : $urandom_range(0, 15);
      for (int k = 0; k < 4; k++) w[32*k +: 32] = (i % 3 == 0) ? $urandom : ($urandom & $urandom);
      if (i % 10 == 0) w = '1;   // row 15 all ones: every plane saturates at 127
      @(negedge clk); mac_en = 1; mac_row = 4'(r); weight = w;
      @(negedge clk); mac_en = 0;
      for (int g = 0; g < 8; g++) begin
        checks++;
        if (int'(mac[g]) != ref_mac(r, g, w)) begin
          failures++; $display("mac mismatch r=%0d g=%0d got %0d exp %0d", r, g, mac[g], ref_mac(r, g, w));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
