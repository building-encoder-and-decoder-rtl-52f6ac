// tb_dnn_decoder: the DNN decoder network (dnn_fcnet with 32 inputs and 64 outputs,
// 5 layers) at a reduced hidden size of 32 nodes and 8 neurons per cycle.
// Random weights and biases are written through the parameter bus, random
// input vectors are pushed in as fast as the input layer accepts them (so
// several vectors are in flight in different layers), and every output is
// compared with a chained integer reference model. The end-to-end latency
// (sum of N_OUT/NPAR + 1 per layer) and the pipelining are checked.
module tb_dnn_decoder;
  import dnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NI = 32, NH = 32, NO = 64, NL = 5, NP = 8;
  localparam int LAT = 4 * (NH / NP + 1) + (NO / NP + 1);

  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0;
  logic [NI*16-1:0] x_bus = '0;
  logic in_en = 1'b0;
  logic [NO*16-1:0] y;
  logic oe, busy;
  param_wr_t prm;
  int checks = 0, failures = 0, overlap = 0;
  int w [NL][];
  int b [NL][];
  int expq [$][];
  int t_in [$];
  int cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  dnn_fcnet #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .N_LAY(NL), .NPAR(NP), .OUT_RELU(1'b1)) dut (
    .i_clk(clk), .i_en(1'b1), .i_in_dat(x_bus), .i_in_en(in_en), .i_init(init), .i_rst_n(rst_n),
    .o_out_dat(y), .o_out_en(oe), .o_busy(busy), .i_param(prm));

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  function automatic int nin(int l);  return (l == 0) ? NI : NH; endfunction
  function automatic int nout(int l); return (l == NL - 1) ? NO : NH; endfunction

  task automatic wr1(input int l, input bit is_b, input int r, input int c, input int v);
    @(negedge clk);
    prm = '0;
    prm.wr = 1'b1; prm.layer = 3'(l); prm.bias = is_b; prm.row = 16'(r); prm.col = 16'(c);
    prm.data = fx_t'(v);
    @(negedge clk);
    prm.wr = 1'b0;
  endtask

  // results come out in order; compare on every o_out_en
  always @(posedge clk) if (rst_n && oe) begin
    int e [];
    checks++;
    if (expq.size() == 0) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      e = expq.pop_front();
      if (cyc - t_in.pop_front() != LAT) begin
        failures++; $display("FAIL latency %0d", cyc);
      end
      for (int r = 0; r < NO; r++) begin
        checks++;
        if (int'(fx_t'(y[r*16 +: 16])) != e[r]) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d got %0d exp %0d", r, fx_t'(y[r*16 +: 16]), e[r]);
        end
      end
    end
  end

  // pipelining: input layer and output layer busy at the same time
  always @(posedge clk)
    if (dut.u00_input_layer_top.busy && dut.u02_output_layer_top.busy) overlap++;

  initial begin
    prm = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < NL; l++) begin
      w[l] = new[nout(l) * nin(l)];
      b[l] = new[nout(l)];
      for (int r = 0; r < nout(l); r++) begin
        b[l][r] = int'($urandom_range(1024)) - 256;
        wr1(l, 1'b1, r, 0, b[l][r]);
        for (int c = 0; c < nin(l); c++) begin
          w[l][r*nin(l)+c] = int'($urandom_range(1600)) - 800;
          wr1(l, 1'b0, r, c, w[l][r*nin(l)+c]);
        end
      end
    end
    for (int k = 0; k < 12; k++) begin
      int x [];
      int h [];
      x = new[NI];
      for (int i = 0; i < NI; i++) begin
        x[i] = int'($urandom_range(8192));
        x_bus[i*16 +: 16] = 16'(x[i]);
      end
      for (int l = 0; l < NL; l++) begin
        ref_layer(nin(l), nout(l), x, w[l], b[l], 1'b1, h);
        x = h;
      end
      while (busy) @(negedge clk);
      expq.push_back(x);
      t_in.push_back(cyc + 1);
      in_en = 1'b1;
      @(negedge clk);
      in_en = 1'b0;
    end
    repeat (2 * LAT) @(negedge clk);
    checks++;
    if (expq.size() != 0 || overlap == 0) begin
      failures++;
      $display("FAIL %0d results missing, pipeline overlap cycles %0d", expq.size(), overlap);
    end
    $display("pipeline overlap cycles: %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
