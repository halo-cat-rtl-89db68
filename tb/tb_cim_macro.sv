// tb_cim_macro -- self-checking test of the CIM macro model.
// Fills all 16 x 128 bit cells through the digital port, reads a sample
// back, then runs MAC cycles with random and with all-ones weights and
// compares each 7-bit code with a popcount computed here (saturating at 127).
// Also checks the one-clock latency of mac_code.
module tb_cim_macro;
  localparam int NC = 128, NR = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic mac_en = 0, dig_en = 0, dig_we = 0, dig_wbit = 0, dig_rbit;
  logic [3:0] mac_row = 0, dig_row = 0;
  logic [6:0] dig_cluster = 0, mac_code;
  logic [NC-1:0] weight = '0;
  logic [NC-1:0] shadow [NR];

  cim_macro dut (.*);

  function automatic int ref_code(logic [NC-1:0] a, logic [NC-1:0] w);
    int n = 0;
    for (int c = 0; c < NC; c++) n += int'(a[c] & w[c]);
    return (n > 127) ? 127 : n;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++) begin
      for (int c = 0; c < NC; c++) shadow[r][c] = (r == 5) ? 1'b1 : 1'($urandom);
    end
    // write all cells
    for (int r = 0; r < NR; r++)
      for (int c = 0; c < NC; c++) begin
        @(negedge clk);
        dig_en = 1; dig_we = 1; dig_row = 4'(r); dig_cluster = 7'(c); dig_wbit = shadow[r][c];
      end
    @(negedge clk); dig_en = 0; dig_we = 0;
    // read back a sample
    for (int i = 0; i < 300; i++) begin
      int r, c;
      r = $urandom_range(0, NR-1); c = $urandom_range(0, NC-1);
      @(negedge clk); dig_en = 1; dig_row = 4'(r); dig_cluster = 7'(c);
      @(negedge clk); dig_en = 0;
      checks++;
      if (dig_rbit !== shadow[r][c]) begin
        failures++; $display("read mismatch r=%0d c=%0d", r, c);
      end
    end
    // MAC
    for (int i = 0; i < 400; i++) begin
      int r;
      logic [NC-1:0] w;
      r = (i % 50 == 0) ? 5 : $urandom_range(0, NR-1);
      for (int k = 0; k < NC/32; k++) w[32*k +: 32] = $urandom;
      if (i % 50 == 0) w = '1;        // full row x full weight: saturation
      @(negedge clk); mac_en = 1; mac_row = 4'(r); weight = w;
      @(negedge clk); mac_en = 0; weight = ~w;   // output must not follow a changed weight
      checks++;
      if (int'(mac_code) != ref_code(shadow[r], w)) begin
        failures++; $display("mac mismatch r=%0d got %0d exp %0d", r, mac_code, ref_code(shadow[r], w));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
