// tb_tmem -- self-checking test of tmem: writes random words to random
// addresses (and to the first and last word), keeps a shadow copy, and reads
// back checking the data and the one-clock read latency.
module tb_tmem;
  localparam int W = 64, D = 3072;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0, re = 0;
  logic [$clog2(D)-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] shadow [D];
  bit           written [D];
  tmem dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = (i == 0) ? 0 : (i == 1) ? D-1 : $urandom_range(0, D-1);
      @(negedge clk); we = 1; waddr = a[$clog2(D)-1:0];
      for (int k = 0; k < W/32; k++) wdata[32*k +: 32] = $urandom;
      shadow[a] = wdata; written[a] = 1;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < D; a++) if (written[a]) begin
      @(negedge clk); re = 1; raddr = a[$clog2(D)-1:0];
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== shadow[a]) begin failures++; $display("mismatch at %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
