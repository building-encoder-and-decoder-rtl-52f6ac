// tb_onehot_mapper: random and corner words; every one of the 64 outputs is
// compared with 1.0 (0x1000) or 0 worked out from the symbol bits.
module tb_onehot_mapper;
  logic [31:0]   word;
  logic [1023:0] oh;
  int checks = 0, failures = 0;

  onehot_mapper dut (.i_word(word), .o_onehot(oh));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      word = (k == 0) ? 32'h0 : (k == 1) ? 32'hffff_ffff : (k == 2) ? 32'h1b1b_e4e4 : $urandom;
      #1;
      for (int n = 0; n < 16; n++)
        for (int v = 0; v < 4; v++) begin
          int exp_v, got;
          exp_v = (((word >> (2*n)) & 3) == v) ? 4096 : 0;
          got = int'(oh[(4*n+v)*16 +: 16]);
          checks++;
          if (got != exp_v) begin
            failures++;
            if (failures < 10) $display("FAIL word %h n=%0d v=%0d got %h", word, n, v, got);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
