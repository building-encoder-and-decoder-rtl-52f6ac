// tb_serial_to_parallel: sends random 32-bit words as bit streams (bit 0
// first, with random idle gaps) and checks every completed word, the single
// valid pulse per word, and that i_init discards a partly received word.
module tb_serial_to_parallel;
  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0;
  logic bit_i = 1'b0, vld = 1'b0;
  logic [31:0] word;
  logic word_vld;
  int checks = 0, failures = 0, pulses = 0;
  logic [31:0] expq [$];
  always #5 clk = ~clk;

  serial_to_parallel #(.N_BITS(32)) dut (.i_clk(clk), .i_rst_n(rst_n), .i_init(init),
    .i_bit(bit_i), .i_bit_vld(vld), .o_word(word), .o_word_vld(word_vld));

  always @(posedge clk) if (rst_n && word_vld) begin
    pulses++;
    checks++;
    if (expq.size() == 0 || word !== expq[0]) begin
      failures++;
      $display("FAIL got %h exp %h", word, (expq.size() != 0) ? expq[0] : 32'h0);
    end
    if (expq.size() != 0) void'(expq.pop_front());
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_word(input logic [31:0] w, input int nbits);
    for (int i = 0; i < nbits; i++) begin
      @(negedge clk);
      bit_i = w[i];
      vld = 1'b1;
      if ($urandom_range(3) == 0) begin
        @(negedge clk);
        vld = 1'b0;
      end
    end
    @(negedge clk);
    vld = 1'b0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 20; k++) begin
      logic [31:0] w;
      w = $urandom;
      expq.push_back(w);
      send_word(w, 32);
    end
    // partial word then init: must be discarded
    send_word(32'hdeadbeef, 13);
    @(negedge clk); init = 1'b1; @(negedge clk); init = 1'b0;
    begin
      logic [31:0] w;
      w = 32'h1234_5678;
      expq.push_back(w);
      send_word(w, 32);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (pulses != 21 || expq.size() != 0) begin
      failures++;
      $display("FAIL pulses=%0d left=%0d", pulses, expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
