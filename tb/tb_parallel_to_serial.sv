// tb_parallel_to_serial: hands random words to the serialiser whenever it is
// idle and checks the bit order (bit 0 first), one bit per cycle, the busy
// flag, and that a word offered while busy is not taken.
module tb_parallel_to_serial;
  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0;
  logic [31:0] word = '0;
  logic wvld = 1'b0;
  logic bit_o, bvld, busy;
  int checks = 0, failures = 0;
  bit expq [$];
  always #5 clk = ~clk;

  parallel_to_serial #(.N_BITS(32)) dut (.i_clk(clk), .i_rst_n(rst_n), .i_init(init),
    .i_word(word), .i_word_vld(wvld), .o_bit(bit_o), .o_bit_vld(bvld), .o_busy(busy));

  always @(posedge clk) if (rst_n && bvld) begin
    checks++;
    if (expq.size() == 0 || bit_o !== expq[0]) begin
      failures++;
      $display("FAIL bit mismatch");
    end
    if (expq.size() != 0) void'(expq.pop_front());
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 10; k++) begin
      int t0, tn;
      word = $urandom;
      for (int i = 0; i < 32; i++) expq.push_back(word[i]);
      wvld = 1'b1;
      @(negedge clk);
      wvld = 1'b0;
      // offer a second word while busy: must be ignored
      word = $urandom;
      wvld = 1'b1;
      @(negedge clk);
      wvld = 1'b0;
      t0 = 0;
      while (busy) begin @(negedge clk); t0++; end
      checks++;
      if (t0 != 30) begin failures++; $display("FAIL busy for %0d cycles", t0 + 1); end
      tn = $urandom_range(3);
      repeat (tn) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d bits missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
