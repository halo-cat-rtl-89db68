// tb_cim_compressor -- self-checking test of the group compressor: random
// and extreme 7-bit codes for the eight bit planes, checked against
// sum_p code[p] * 2**p computed here.
module tb_cim_compressor;
  int checks = 0, failures = 0;
  logic [7:0][6:0] code;
  logic [14:0] mac;
  cim_compressor dut (.*);

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int e;
      e = 0;
      for (int p = 0; p < 8; p++) begin
        code[p] = (i == 0) ? 7'd127 : (i == 1) ? 7'd0 : 7'($urandom);
        e += int'(code[p]) * (1 << p);
      end
      #1;
      checks++;
      if (int'(mac) != e) begin
        failures++; $display("mismatch got %0d exp %0d", mac, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
