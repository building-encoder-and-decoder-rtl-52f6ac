// tb_symbol_decision: random signed scores (also negative values and ties)
// and a per-subcarrier argmax worked out in the testbench.
module tb_symbol_decision;
  logic [1023:0] sc;
  logic [31:0]   word;
  int checks = 0, failures = 0;

  symbol_decision dut (.i_scores(sc), .o_word(word));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 300; k++) begin
      int s [64];
      for (int i = 0; i < 64; i++) begin
        if (k % 3 == 0) s[i] = int'($urandom_range(4)) - 2;       // many ties
        else            s[i] = int'($urandom_range(65535)) - 32768;
        sc[i*16 +: 16] = 16'(s[i]);
      end
      #1;
      for (int n = 0; n < 16; n++) begin
        int best, bi;
        best = s[4*n]; bi = 0;
        for (int v = 1; v < 4; v++) if (s[4*n+v] > best) begin best = s[4*n+v]; bi = v; end
        checks++;
        if (int'(word[2*n +: 2]) != bi) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d got %0d exp %0d", n, word[2*n +: 2], bi);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
