// tb_wbuf -- self-checking test of the weight buffer: positive pass gives
// mask & ~sign, negative pass mask & sign, one clock after load; the output
// holds while load is low. Then random pixel-slot settings (slot_lg 0..6,
// any slot offset): only the low 2**slot_lg bits are kept, moved up by the
// offset.
module tb_wbuf;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic load = 0, neg = 0;
  logic [2:0] slot_lg = 3'd7; logic [6:0] slot_off = '0;
  logic [127:0] mask, sign, weight, e;
  wbuf dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 500; i++) begin
      for (int k = 0; k < 4; k++) begin mask[32*k +: 32] = $urandom; sign[32*k +: 32] = $urandom; end
      @(negedge clk); load = 1; neg = 1'(i);
      for (int b = 0; b < 128; b++) e[b] = mask[b] & (neg ? sign[b] : ~sign[b]);
      @(negedge clk); load = 0; mask = ~mask;
      checks++;
      if (weight !== e) begin failures++; $display("mismatch i=%0d", i); end
      @(negedge clk);
      checks++;
      if (weight !== e) begin failures++; $display("hold mismatch i=%0d", i); end
    end
    for (int i = 0; i < 500; i++) begin
      int n;
      for (int k = 0; k < 4; k++) begin mask[32*k +: 32] = $urandom; sign[32*k +: 32] = $urandom; end
      @(negedge clk); load = 1; neg = 1'($urandom);
      slot_lg = 3'($urandom_range(0, 6)); n = 1 << slot_lg;
      slot_off = 7'($urandom_range(0, 128 / n - 1) * n);
      e = '0;
      for (int b = 0; b < n; b++) e[int'(slot_off) + b] = mask[b] & (neg ? sign[b] : ~sign[b]);
      @(negedge clk); load = 0;
      checks++;
      if (weight !== e) begin failures++; $display("slot mismatch i=%0d lg=%0d off=%0d", i, slot_lg, slot_off); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
