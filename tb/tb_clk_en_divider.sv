// tb_clk_en_divider: checks the spacing of the clock-enable strobe for
// several divide ratios (0 and 1 mean every cycle) against the expected
// period, counting strobes over a fixed window.
module tb_clk_en_divider;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [3:0] div;
  logic en;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  clk_en_divider #(.DIV_W(4)) dut (.i_clk(clk), .i_rst_n(rst_n), .i_div(div), .o_en(en));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ratios [6] = '{0, 1, 2, 3, 5, 15};
    div = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    foreach (ratios[i]) begin
      int cnt, last, gaps_bad, period;
      period = (ratios[i] <= 1) ? 1 : ratios[i];
      div = 4'(ratios[i]);
      repeat (40) @(posedge clk);          // settle
      cnt = 0; last = -1; gaps_bad = 0;
      for (int t = 0; t < 30 * period; t++) begin
        @(posedge clk);
        if (en) begin
          if (last >= 0 && t - last != period) gaps_bad++;
          last = t;
          cnt++;
        end
      end
      checks++;
      if (cnt != 30 || gaps_bad != 0) begin
        failures++;
        $display("FAIL div=%0d strobes=%0d (exp 30) bad gaps=%0d", ratios[i], cnt, gaps_bad);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
