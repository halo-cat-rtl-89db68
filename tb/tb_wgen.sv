// tb_wgen -- self-checking test of the weight generator.
// Checks that the signs equal the xorshift32 sequence defined for WGEN
// (recomputed here step by step), that the same index always gives the same
// vector, that neighbouring indices give different vectors, and that about
// half of the signs are set.
module tb_wgen;
  int checks = 0, failures = 0;
  logic [15:0] seed;
  logic [11:0] oc;
  logic [5:0]  kpos;
  logic [3:0]  chunk;
  logic [127:0] sign, first;
  wgen dut (.*);

  function automatic logic [127:0] ref_sign(logic [15:0] s, logic [11:0] o, logic [5:0] k, logic [3:0] c);
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

  initial begin
    longint ones = 0, total = 0;
    for (int i = 0; i < 2000; i++) begin
      seed = 16'($urandom); oc = 12'($urandom); kpos = 6'($urandom_range(0, 48)); chunk = 4'($urandom);
      #1;
      checks++;
      if (sign !== ref_sign(seed, oc, kpos, chunk)) begin failures++; $display("mismatch %0d", i); end
      first = sign;
      ones += $countones(sign); total += 128;
      // neighbouring output channel must differ
      oc = oc + 12'd1; #1;
      checks++;
      if (sign === first) begin failures++; $display("same vector for adjacent oc"); end
      // and coming back must repeat
      oc = oc - 12'd1; #1;
      checks++;
      if (sign !== first) begin failures++; $display("not reproducible"); end
    end
    checks++;
    if (ones * 100 < total * 45 || ones * 100 > total * 55) begin
      failures++; $display("sign balance %0d of %0d", ones, total);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
