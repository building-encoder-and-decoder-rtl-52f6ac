// tb_dnn_ofdm_top: end-to-end test of dnn_ofdm_top at a reduced hidden size (64 nodes, 16 neurons per cycle).
//
// The transmitter's DAC samples are looped back to the receiver's ADC
// through a behavioural channel (a delay of a few cycles plus a small
// pseudo-random error of up to +-3 LSB on every sample). Both networks are
// loaded through the parameter bus with the known-answer parameter set of
// tb_ref_pkg, so the bits that come out must equal the bits that went in.
// Phases (each checks the received bits):
//   1. full network clock, back-to-back symbols;
//   2. network clock divided by 4 (1: undivided), symbols back to back,
//      so a new symbol enters the encoder while the previous one is still
//      in its middle layers;
//   3. parameter update: the encoder's output layer is rewritten so that it
//      sends 1 - bit 0; the received bit 0 of every subcarrier must flip;
//      then the original parameters are restored;
//   4. network clock divided by 15: the encoder cannot keep up and the
//      transmit overflow flag must be set; i_init must clear it;
//   5. two ADC symbols in quick succession: receive overflow flag;
//   6. normal traffic after i_init.
// The testbench counts how often each mechanism happened (clock-enable
// stall cycles, cycles with two symbols in flight in the encoder, parameter
// reloads, overflows, init clears) and fails a mechanism that never did.
// It also checks that every DNN layer finishes within one OFDM symbol time
// (32 bit clocks at one information bit per clock) at the full clock rate.
module tb_dnn_ofdm_top;
  import dnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int NH = 64, NP = 16, NL = 5;
  localparam int NOISE = 3;

  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0;
  logic [3:0] div = 4'd1;
  param_wr_t prm;
  logic tx_bit = 1'b0, tx_vld = 1'b0;
  fx_t dac_re [16], dac_im [16], adc_re [16], adc_im [16];
  logic dac_vld, adc_vld = 1'b0, rx_bit, rx_vld, tx_ovf, rx_ovf;
  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_reload = 0, n_txovf = 0, n_rxovf = 0, n_init = 0;
  int n_bits_ok = 0;
  bit exp_bits [$];
  bit check_rx = 1'b1;
  always #5 clk = ~clk;

  dnn_ofdm_top #(.N_HID(64), .NPAR(16)) dut (
    .i_clk(clk), .i_rst_n(rst_n), .i_init(init), .i_clk_div(div), .i_param(prm),
    .i_bit(tx_bit), .i_bit_vld(tx_vld), .o_dac_re(dac_re), .o_dac_im(dac_im),
    .o_dac_vld(dac_vld), .o_tx_overflow(tx_ovf),
    .i_adc_re(adc_re), .i_adc_im(adc_im), .i_adc_vld(adc_vld),
    .o_bit(rx_bit), .o_bit_vld(rx_vld), .o_rx_overflow(rx_ovf));

  initial begin
    #(64'd50_000_000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  // ---- behavioural channel: DAC -> ADC loop-back with delay and small error
  bit chan_on = 1'b1;
  always @(posedge clk) begin
    if (rst_n && dac_vld && chan_on) begin
      fx_t sr [16], si [16];
      for (int n = 0; n < 16; n++) begin
        sr[n] = dac_re[n] + fx_t'(int'($urandom_range(2*NOISE)) - NOISE);
        si[n] = dac_im[n] + fx_t'(int'($urandom_range(2*NOISE)) - NOISE);
      end
      repeat (4) @(posedge clk);
      #1;
      adc_re = sr;
      adc_im = si;
      adc_vld = 1'b1;
      @(posedge clk);
      #1 adc_vld = 1'b0;
    end
  end

  // ---- receiver check
  always @(posedge clk) if (rst_n && rx_vld && check_rx) begin
    checks++;
    if (exp_bits.size() == 0) begin
      failures++;
      $display("FAIL unexpected received bit");
    end else if (rx_bit !== exp_bits.pop_front()) begin
      failures++;
      if (failures < 10) $display("FAIL received bit differs at t=%0t", $time);
    end else n_bits_ok++;
  end

  // ---- mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (!dut.en) n_stall++;
    if (dut.u_dl_enc_top.u00_input_layer_top.busy && dut.u_dl_enc_top.g_mid[1].u01_middle_layer_top.busy)
      n_overlap++;
  end

  // ---- per-layer time at full clock rate
  int t_start = -1, n_layer_meas = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && div <= 1) begin
      if (dut.u_dl_enc_top.u00_input_layer_top.start) t_start = cyc;
      if (dut.u_dl_enc_top.u00_input_layer_top.o_out_en && t_start >= 0) begin
        checks++;
        n_layer_meas++;
        if (cyc - t_start >= 32) begin
          failures++;
          $display("FAIL layer took %0d cycles, OFDM symbol is 32", cyc - t_start);
        end
        if (n_layer_meas == 1) $display("input layer time: %0d cycles (symbol: 32)", cyc - t_start);
        t_start = -1;
      end
    end
  end

  task automatic load_net(input int net, input int first_layer, input bit flip);
    for (int l = first_layer; l < NL; l++) begin
      int ni, no;
      ni = (l == 0) ? ((net == 0) ? ENC_IN : ENC_OUT) : NH;
      no = (l == NL - 1) ? ((net == 0) ? ENC_OUT : ENC_IN) : NH;
      for (int r = 0; r < no; r++) begin
        for (int c = -1; c < ni; c++) begin
          @(negedge clk);
          prm.wr   = 1'b1;
          prm.net  = 1'(net);
          prm.layer = 3'(l);
          prm.bias = (c < 0);
          prm.row  = 16'(r);
          prm.col  = 16'((c < 0) ? 0 : c);
          prm.data = fx_t'(kat_param(net, l, NL, r, c, flip));
        end
      end
    end
    @(negedge clk);
    prm.wr = 1'b0;
  endtask

  task automatic send(input int nsym, input logic [31:0] mask);
    for (int s = 0; s < nsym; s++) begin
      logic [31:0] w;
      w = $urandom;
      for (int i = 0; i < 32; i++) begin
        exp_bits.push_back(w[i] ^ mask[i]);
        @(negedge clk);
        tx_bit = w[i];
        tx_vld = 1'b1;
      end
    end
    @(negedge clk);
    tx_vld = 1'b0;
  endtask

  task automatic drain(input int max_cycles);
    int t;
    t = 0;
    while (exp_bits.size() != 0 && t < max_cycles) begin @(negedge clk); t++; end
    repeat (40) @(negedge clk);
    checks++;
    if (exp_bits.size() != 0) begin
      failures++;
      $display("FAIL %0d bits never received", exp_bits.size());
      exp_bits.delete();
    end
  endtask

  task automatic do_init();
    @(negedge clk);
    init = 1'b1;
    @(negedge clk);
    init = 1'b0;
    n_init++;
  endtask

  initial begin
    prm = '0;
    for (int n = 0; n < 16; n++) begin adc_re[n] = '0; adc_im[n] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    load_net(0, 0, 1'b0);
    load_net(1, 0, 1'b0);
    $display("parameters loaded at t=%0t", $time);
    // 1: full rate
    div = 4'd1;
    send(6, 32'h0);
    drain(4000);
    // 2: divided clock, symbols overlap in the encoder pipeline
    div = 4'd4;
    send(6, 32'h0);
    drain(20000);
    div = 4'd1;
    // 3: parameter update: encoder output layer now sends 1 - bit 0
    load_net(0, NL - 1, 1'b1);
    n_reload++;
    send(3, 32'h5555_5555);
    drain(4000);
    load_net(0, NL - 1, 1'b0);
    n_reload++;
    send(2, 32'h0);
    drain(4000);
    // 4: transmit overflow with a very slow network clock
    div = 4'd15;
    check_rx = 1'b0;
    send(4, 32'h0);
    checks++;
    if (tx_ovf) n_txovf++;
    else begin failures++; $display("FAIL no transmit overflow flagged"); end
    repeat (20000) @(negedge clk);
    exp_bits.delete();
    do_init();
    checks++;
    if (tx_ovf) begin failures++; $display("FAIL init did not clear overflow"); end
    // 5: receive overflow: a second ADC symbol while the FFT is busy
    div = 4'd1;
    chan_on = 1'b0;
    @(negedge clk) adc_vld = 1'b1;
    @(negedge clk) adc_vld = 1'b0;
    repeat (3) @(negedge clk);
    adc_vld = 1'b1;
    @(negedge clk) adc_vld = 1'b0;
    repeat (2) @(negedge clk);
    checks++;
    if (rx_ovf) n_rxovf++;
    else begin failures++; $display("FAIL no receive overflow flagged"); end
    repeat (3000) @(negedge clk);
    do_init();
    chan_on = 1'b1;
    check_rx = 1'b1;
    // 6: normal traffic again after init
    send(2, 32'h0);
    drain(4000);

    // report
    $display("stall cycles %0d, encoder overlap cycles %0d, reloads %0d, tx overflows %0d, rx overflows %0d, inits %0d, bits ok %0d",
             n_stall, n_overlap, n_reload, n_txovf, n_rxovf, n_init, n_bits_ok);
    checks++;
    if (n_stall == 0 || n_overlap == 0 || n_reload == 0 || n_txovf == 0 || n_rxovf == 0 || n_init == 0 || n_layer_meas == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
