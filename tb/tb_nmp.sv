// tb_nmp -- self-checking test of the near-memory pipeline.
// Each trial clears the accumulators, feeds 1..20 random MAC vectors with
// random kernel-column offsets (-3..3), signs and tile widths, then
// post-processes with random scale, shift, bias and shortcut operand. The
// eight 8-bit results are compared with a model kept here: lane w adds or
// subtracts mac[w+sh] when 0 <= w+sh < tile_w, then
// clamp(((acc*scale) >>> shift) + bias + res, 0, 255). out_valid must
// follow post_en by exactly one clock. Counts clamps at 0 and at 255.
module tb_nmp;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int n_lo = 0, n_hi = 0;

  logic rst_n = 0, clear = 0, acc_en = 0, neg = 0, post_en = 0, res_en = 0, out_valid;
  logic [7:0][14:0] mac = '0;
  logic signed [3:0] sh = 0;
  logic [3:0] tile_w = 8;
  logic [7:0] scale = 1;
  logic [4:0] shift = 0;
  logic signed [15:0] bias = 0;
  logic [7:0][7:0] res = '0, out;
  longint m_acc [8];

  nmp dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int n;
      @(negedge clk); clear = 1;
      for (int w = 0; w < 8; w++) m_acc[w] = 0;
      n = $urandom_range(1, 20);
      tile_w = 4'($urandom_range(1, 8));
      for (int i = 0; i < n; i++) begin
        @(negedge clk); clear = 0; acc_en = 1;
        sh = 4'($signed($urandom_range(0, 6)) - 3);
        neg = 1'($urandom);
        for (int w = 0; w < 8; w++) mac[w] = 15'($urandom_range(0, (t % 4 == 0) ? 32385 : 3000));
        for (int w = 0; w < 8; w++) begin
          int s;
          s = w + int'(sh);
          if (s >= 0 && s < int'(tile_w)) m_acc[w] += neg ? -longint'(mac[s]) : longint'(mac[s]);
        end
      end
      @(negedge clk); acc_en = 0; post_en = 1;
      scale = 8'($urandom_range(0, 255));
      shift = 5'($urandom_range(0, 16));
      bias = 16'($signed($urandom_range(0, 1000)) - 500);
      res_en = 1'($urandom);
      for (int w = 0; w < 8; w++) res[w] = 8'($urandom);
      @(negedge clk); post_en = 0;
      checks++;
      if (out_valid !== 1'b1) begin failures++; $display("out_valid missing"); end
      for (int w = 0; w < 8; w++) begin
        longint v;
        logic [7:0] e;
        v = (m_acc[w] * longint'(scale)) >>> shift;
        v = v + longint'(bias) + (res_en ? longint'(res[w]) : 0);
        if (v < 0) begin e = 0; n_lo++; end
        else if (v > 255) begin e = 255; n_hi++; end
        else e = 8'(v);
        checks++;
        if (out[w] !== e) begin failures++; $display("t=%0d lane %0d got %0d exp %0d", t, w, out[w], e); end
      end
      @(negedge clk);
      checks++;
      if (out_valid !== 1'b0) begin failures++; $display("out_valid too long"); end
    end
    checks++;
    if (n_lo == 0 || n_hi == 0) begin failures++; $display("clamps not exercised %0d %0d", n_lo, n_hi); end
    $display("clamp low %0d, clamp high %0d", n_lo, n_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
