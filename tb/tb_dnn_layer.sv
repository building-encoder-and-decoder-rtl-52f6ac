// tb_dnn_layer: one small fully connected layer (24 -> 16, 4 neurons per
// cycle) with random weights, biases and inputs, in two copies: with ReLU
// and without. Every output is compared with the integer reference in
// tb_ref_pkg. Also checked: the latency of N_OUT/NPAR + 1 enabled cycles
// from the sampling of i_in_en to o_out_en, the same latency counted in
// enabled cycles when i_en is high only every third cycle, that i_init
// abandons a computation, and that large weights saturate (counted).
module tb_dnn_layer;
  import dnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NI = 24, NO = 16, NP = 4, LAT = NO / NP + 1;

  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0, en = 1'b1;
  logic [NI*16-1:0] x_bus = '0;
  logic in_en = 1'b0;
  logic [NO*16-1:0] y_r, y_l;
  logic oe_r, oe_l, busy_r, busy_l;
  logic wr = 1'b0, wb = 1'b0;
  logic [15:0] row = '0, col = '0;
  fx_t data = '0;
  int checks = 0, failures = 0, sat_seen = 0, neg_seen = 0;
  int w [];
  int b [];
  always #5 clk = ~clk;

  dnn_layer #(.N_IN(NI), .N_OUT(NO), .NPAR(NP), .RELU(1'b1)) dut_relu (
    .i_clk(clk), .i_en(en), .i_in(x_bus), .i_in_en(in_en), .i_init(init), .i_rst_n(rst_n),
    .o_out(y_r), .o_out_en(oe_r), .o_busy(busy_r),
    .i_wr(wr), .i_wr_bias(wb), .i_wr_row(row), .i_wr_col(col), .i_wr_data(data));
  dnn_layer #(.N_IN(NI), .N_OUT(NO), .NPAR(NP), .RELU(1'b0)) dut_lin (
    .i_clk(clk), .i_en(en), .i_in(x_bus), .i_in_en(in_en), .i_init(init), .i_rst_n(rst_n),
    .o_out(y_l), .o_out_en(oe_l), .o_busy(busy_l),
    .i_wr(wr), .i_wr_bias(wb), .i_wr_row(row), .i_wr_col(col), .i_wr_data(data));

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic wr1(input bit is_b, input int r, input int c, input int v);
    @(negedge clk);
    wr = 1'b1; wb = is_b; row = 16'(r); col = 16'(c); data = fx_t'(v);
    @(negedge clk);
    wr = 1'b0;
  endtask

  task automatic load(input int wmax);
    for (int r = 0; r < NO; r++) begin
      b[r] = int'($urandom_range(2*4096)) - 4096;
      wr1(1'b1, r, 0, b[r]);
      for (int c = 0; c < NI; c++) begin
        w[r*NI+c] = int'($urandom_range(2*wmax)) - wmax;
        wr1(1'b0, r, c, w[r*NI+c]);
      end
    end
  endtask

  // Apply one vector, wait for the result, compare. div: i_en every div cycles.
  task automatic run_vec(input int div, input int xmax);
    int x [];
    int yr [], yl [];
    int en_edges;
    x = new[NI];
    for (int i = 0; i < NI; i++) begin
      x[i] = int'($urandom_range(2*xmax)) - xmax;
      x_bus[i*16 +: 16] = 16'(x[i]);
    end
    ref_layer(NI, NO, x, w, b, 1'b1, yr);
    ref_layer(NI, NO, x, w, b, 1'b0, yl);
    // present in_en until an enabled edge samples it
    @(negedge clk);
    in_en = 1'b1;
    while (!en) @(negedge clk);
    @(negedge clk);
    in_en = 1'b0;
    en_edges = 0;
    // count enabled edges until o_out_en is seen
    while (!oe_r) begin
      if (en) en_edges++;
      @(negedge clk);
      if (en_edges > 10 * LAT) break;
    end
    checks++;
    if (en_edges + 1 != LAT || !oe_l) begin
      failures++;
      $display("FAIL latency: %0d enabled cycles, expected %0d", en_edges + 1, LAT);
    end
    for (int r = 0; r < NO; r++) begin
      checks += 2;
      if (int'(fx_t'(y_r[r*16 +: 16])) != yr[r]) begin
        failures++;
        $display("FAIL relu out %0d got %0d exp %0d", r, fx_t'(y_r[r*16 +: 16]), yr[r]);
      end
      if (int'(fx_t'(y_l[r*16 +: 16])) != yl[r]) begin
        failures++;
        $display("FAIL lin out %0d got %0d exp %0d", r, fx_t'(y_l[r*16 +: 16]), yl[r]);
      end
      if (yl[r] == 32767 || yl[r] == -32768) sat_seen++;
      if (yl[r] < 0) neg_seen++;
    end
    // o_out_en lasts exactly one enabled cycle
    while (!en) @(negedge clk);
    @(negedge clk);
    checks++;
    if (oe_r) begin failures++; $display("FAIL o_out_en longer than one enabled cycle"); end
  endtask

  initial begin
    w = new[NO*NI];
    b = new[NO];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load(4096);
    for (int k = 0; k < 6; k++) run_vec(1, 4096);
    // slow clock enable: every third cycle
    fork
      begin
        for (int k = 0; k < 4; k++) run_vec(3, 4096);
      end
      begin
        int ph;
        ph = 0;
        while (1) begin
          @(posedge clk);
          #1 en = (ph == 2);
          ph = (ph + 1) % 3;
        end
      end
    join_any
    disable fork;
    @(negedge clk);
    en = 1'b1;
    // i_init in the middle of a computation: no o_out_en, outputs cleared
    @(negedge clk);
    in_en = 1'b1;
    @(negedge clk);
    in_en = 1'b0;
    @(negedge clk);
    init = 1'b1;
    @(negedge clk);
    init = 1'b0;
    repeat (2 * LAT) begin
      @(negedge clk);
      checks++;
      if (oe_r || busy_r || y_r != '0) begin failures++; $display("FAIL init did not clear"); break; end
    end
    // large weights and inputs: saturation
    load(32767);
    for (int k = 0; k < 3; k++) run_vec(1, 32767);
    checks++;
    if (sat_seen == 0 || neg_seen == 0) begin
      failures++;
      $display("FAIL saturation seen %0d, negative seen %0d", sat_seen, neg_seen);
    end
    $display("saturated outputs: %0d, negative outputs: %0d", sat_seen, neg_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
