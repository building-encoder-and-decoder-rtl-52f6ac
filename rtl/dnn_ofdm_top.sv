// dnn_ofdm_top: digital part of an OFDM link whose constellation mapper and
// demapper are deep neural networks.
//
// Transmit chain: serial bits -> serial_to_parallel (32 bits per OFDM
// symbol) -> onehot_mapper (64 one-hot inputs) -> DNN encoder
// (64 -> 512 x 4 -> 32) -> IFFT (16 complex subcarriers X_k = enc[2k] +
// j*enc[2k+1]) -> 16 complex time samples on o_dac_*.
// Receive chain: 16 complex samples on i_adc_* -> FFT -> DNN decoder
// (32 -> 512 x 4 -> 64) -> symbol_decision (argmax per subcarrier) ->
// parallel_to_serial -> serial bits.
// DAC, RF, channel and ADC are analog and lie outside; their digital sample
// buses are this module's ports, one OFDM symbol in parallel with a valid
// strobe (this design's choice).
//
// Both networks run on the clock-enable strobe of clk_en_divider
// (i_clk_div = 0/1: every cycle). Their weights and biases are written
// through i_param (i_param.net selects encoder or decoder).
//
// Rate matching: a completed transmit word waits in a one-word holding
// register until the encoder's input layer is free; likewise a received FFT
// result waits for the decoder. If a further word completes while one is
// still held, the new word is dropped and the sticky o_tx_overflow /
// o_rx_overflow flag is set (cleared by i_init). A decided word is dropped
// likewise, setting o_rx_overflow, if the parallel-to-serial stage is still
// busy. These holding registers and flags are this design's choice; the
// source only requires that the processing keep up with the OFDM symbol rate.
// Transmit and receive chains are independent and may run at the same time.
module dnn_ofdm_top
  import dnn_pkg::*;
#(
  parameter int N_HID = N_HIDDEN,
  parameter int NPAR  = 32
) (
  input  logic      i_clk,
  input  logic      i_rst_n,
  input  logic      i_init,
  input  logic [3:0] i_clk_div,
  input  param_wr_t i_param,
  // transmit side
  input  logic      i_bit,
  input  logic      i_bit_vld,
  output fx_t       o_dac_re [16],
  output fx_t       o_dac_im [16],
  output logic      o_dac_vld,
  output logic      o_tx_overflow,
  // receive side
  input  fx_t       i_adc_re [16],
  input  fx_t       i_adc_im [16],
  input  logic      i_adc_vld,
  output logic      o_bit,
  output logic      o_bit_vld,
  output logic      o_rx_overflow
);
  logic en;

  clk_en_divider #(.DIV_W(4)) u_clk_div (
    .i_clk   (i_clk),
    .i_rst_n (i_rst_n),
    .i_div   (i_clk_div),
    .o_en    (en)
  );

  param_wr_t enc_param, dec_param;
  always_comb begin
    enc_param    = i_param;
    dec_param    = i_param;
    enc_param.wr = i_param.wr && !i_param.net;
    dec_param.wr = i_param.wr &&  i_param.net;
  end

  // ---------------------------------------------------------------- transmit
  logic [SYM_BITS-1:0]      tx_word;
  logic                     tx_word_vld;
  logic [SYM_BITS-1:0]      tx_hold;
  logic                     tx_pending;
  logic [ENC_IN*DATA_W-1:0] enc_in;
  logic                     enc_start, enc_busy;
  logic [ENC_OUT*DATA_W-1:0] enc_out;
  logic                     enc_out_en;
  fx_t                      ifft_re [16], ifft_im [16];
  logic                     ifft_busy;

  serial_to_parallel #(.N_BITS(SYM_BITS)) u_s2p (
    .i_clk      (i_clk),
    .i_rst_n    (i_rst_n),
    .i_init     (i_init),
    .i_bit      (i_bit),
    .i_bit_vld  (i_bit_vld),
    .o_word     (tx_word),
    .o_word_vld (tx_word_vld)
  );

  assign enc_start = en && tx_pending && !enc_busy;

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      tx_hold       <= '0;
      tx_pending    <= 1'b0;
      o_tx_overflow <= 1'b0;
    end else if (i_init) begin
      tx_pending    <= 1'b0;
      o_tx_overflow <= 1'b0;
    end else begin
      if (tx_word_vld && tx_pending && !enc_start) begin
        o_tx_overflow <= 1'b1;               // held word not yet taken
      end else if (tx_word_vld) begin
        tx_hold    <= tx_word;
        tx_pending <= 1'b1;
      end else if (enc_start) begin
        tx_pending <= 1'b0;
      end
    end
  end

  onehot_mapper #(.N_SC_P(N_SC), .BPS(BITS_PER_SC)) u_onehot (
    .i_word   (tx_hold),
    .o_onehot (enc_in)
  );

  dnn_fcnet #(.N_IN(ENC_IN), .N_HID(N_HID), .N_OUT(ENC_OUT), .N_LAY(N_LAYERS),
              .NPAR(NPAR), .OUT_RELU(1'b1)) u_dl_enc_top (
    .i_clk     (i_clk),
    .i_en      (en),
    .i_in_dat  (enc_in),
    .i_in_en   (enc_start),
    .i_init    (i_init),
    .i_rst_n   (i_rst_n),
    .o_out_dat (enc_out),
    .o_out_en  (enc_out_en),
    .o_busy    (enc_busy),
    .i_param   (enc_param)
  );

  always_comb begin
    for (int k = 0; k < 16; k++) begin
      ifft_re[k] = fx_t'(enc_out[(2*k)*DATA_W +: DATA_W]);
      ifft_im[k] = fx_t'(enc_out[(2*k+1)*DATA_W +: DATA_W]);
    end
  end

  ofdm_dft #(.INVERSE(1'b1)) u_ifft (
    .i_clk   (i_clk),
    .i_rst_n (i_rst_n),
    .i_init  (i_init),
    .i_start (enc_out_en && en),
    .i_re    (ifft_re),
    .i_im    (ifft_im),
    .o_re    (o_dac_re),
    .o_im    (o_dac_im),
    .o_done  (o_dac_vld),
    .o_busy  (ifft_busy)
  );

  // ----------------------------------------------------------------- receive
  fx_t                       fft_re [16], fft_im [16];
  logic                      fft_done, fft_busy;
  logic [ENC_OUT*DATA_W-1:0] rx_hold;
  logic                      rx_pending;
  logic                      dec_start, dec_busy;
  logic [ENC_IN*DATA_W-1:0]  dec_out;
  logic                      dec_out_en;
  logic [SYM_BITS-1:0]       rx_word;
  logic                      p2s_busy;

  ofdm_dft #(.INVERSE(1'b0)) u_fft (
    .i_clk   (i_clk),
    .i_rst_n (i_rst_n),
    .i_init  (i_init),
    .i_start (i_adc_vld),
    .i_re    (i_adc_re),
    .i_im    (i_adc_im),
    .o_re    (fft_re),
    .o_im    (fft_im),
    .o_done  (fft_done),
    .o_busy  (fft_busy)
  );

  assign dec_start = en && rx_pending && !dec_busy;

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      rx_hold       <= '0;
      rx_pending    <= 1'b0;
      o_rx_overflow <= 1'b0;
    end else if (i_init) begin
      rx_pending    <= 1'b0;
      o_rx_overflow <= 1'b0;
    end else begin
      if ((fft_done && rx_pending && !dec_start) ||
          (i_adc_vld && fft_busy) ||
          (dec_out_en && en && p2s_busy)) begin
        o_rx_overflow <= 1'b1;
      end
      if (fft_done && !(rx_pending && !dec_start)) begin
        for (int k = 0; k < 16; k++) begin
          rx_hold[(2*k)*DATA_W +: DATA_W]   <= fft_re[k];
          rx_hold[(2*k+1)*DATA_W +: DATA_W] <= fft_im[k];
        end
        rx_pending <= 1'b1;
      end else if (dec_start) begin
        rx_pending <= 1'b0;
      end
    end
  end

  dnn_fcnet #(.N_IN(ENC_OUT), .N_HID(N_HID), .N_OUT(ENC_IN), .N_LAY(N_LAYERS),
              .NPAR(NPAR), .OUT_RELU(1'b1)) u_dl_dec_top (
    .i_clk     (i_clk),
    .i_en      (en),
    .i_in_dat  (rx_hold),
    .i_in_en   (dec_start),
    .i_init    (i_init),
    .i_rst_n   (i_rst_n),
    .o_out_dat (dec_out),
    .o_out_en  (dec_out_en),
    .o_busy    (dec_busy),
    .i_param   (dec_param)
  );

  symbol_decision #(.N_SC_P(N_SC), .BPS(BITS_PER_SC)) u_decision (
    .i_scores (dec_out),
    .o_word   (rx_word)
  );

  parallel_to_serial #(.N_BITS(SYM_BITS)) u_p2s (
    .i_clk      (i_clk),
    .i_rst_n    (i_rst_n),
    .i_init     (i_init),
    .i_word     (rx_word),
    .i_word_vld (dec_out_en && en),
    .o_bit      (o_bit),
    .o_bit_vld  (o_bit_vld),
    .o_busy     (p2s_busy)
  );

  // The IFFT finishes (17 cycles) long before the encoder can deliver the
  // next symbol (at least 3 layer times), so it is never found busy.
  a_ifft_free : assert property (@(posedge i_clk) disable iff (!i_rst_n || i_init)
    (enc_out_en && en) |-> !ifft_busy)
    else $error("dnn_ofdm_top: IFFT busy when encoder output arrived");

endmodule
