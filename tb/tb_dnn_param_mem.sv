// tb_dnn_param_mem: fills a small parameter store with random weights and
// biases through the one-word write port, reads every neuron group and
// compares all words; also checks that out-of-range writes change nothing.
module tb_dnn_param_mem;
  import dnn_pkg::*;
  localparam int NI = 12, NO = 16, NP = 4, NG = NO / NP;
  logic clk = 1'b0;
  logic wr = 1'b0, wb = 1'b0, rd = 1'b0;
  logic [15:0] row = '0, col = '0;
  fx_t data = '0;
  logic [1:0] grp = '0;
  fx_t ow [NP][NI];
  fx_t ob [NP];
  int checks = 0, failures = 0;
  int w [NO][NI];
  int b [NO];
  always #5 clk = ~clk;

  dnn_param_mem #(.N_IN(NI), .N_OUT(NO), .NPAR(NP)) dut (.i_clk(clk), .i_wr(wr),
    .i_wr_bias(wb), .i_wr_row(row), .i_wr_col(col), .i_wr_data(data),
    .i_rd(rd), .i_rd_grp(grp), .o_w(ow), .o_b(ob));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr1(input bit is_b, input int r, input int c, input int v);
    @(negedge clk);
    wr = 1'b1; wb = is_b; row = 16'(r); col = 16'(c); data = fx_t'(v);
    @(negedge clk);
    wr = 1'b0;
  endtask

  initial begin
    for (int r = 0; r < NO; r++) begin
      b[r] = int'($urandom_range(65535)) - 32768;
      wr1(1'b1, r, 0, b[r]);
      for (int c = 0; c < NI; c++) begin
        w[r][c] = int'($urandom_range(65535)) - 32768;
        wr1(1'b0, r, c, w[r][c]);
      end
    end
    wr1(1'b0, 0, NI, 16'h1111);   // column out of range
    wr1(1'b1, NO, 0, 16'h2222);   // row out of range
    wr1(1'b0, NO + 3, 1, 16'h3333);
    for (int g = NG - 1; g >= 0; g--) begin
      @(negedge clk);
      rd = 1'b1; grp = 2'(g);
      @(negedge clk);
      rd = 1'b0;
      grp = 2'(g + 1);             // must not matter without i_rd
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (int'(ob[p]) != b[g*NP+p]) begin failures++; $display("FAIL bias %0d", g*NP+p); end
        for (int c = 0; c < NI; c++) begin
          checks++;
          if (int'(ow[p][c]) != w[g*NP+p][c]) begin
            failures++;
            if (failures < 10) $display("FAIL w[%0d][%0d] got %0d exp %0d", g*NP+p, c, ow[p][c], w[g*NP+p][c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
