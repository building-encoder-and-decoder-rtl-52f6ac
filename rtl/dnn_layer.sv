// dnn_layer: one fully connected DNN layer, y = act(W x + b), in Q3.12.
//
// This is the "layer_top" of the encoder and decoder: the same module serves
// as input, middle and output layer, set by N_IN, N_OUT and RELU. Its ports
// i_clk, i_en, i_in, i_in_en, i_init, i_rst_n, o_out and o_out_en, and the
// flat bus widths (N_IN*16 and N_OUT*16 bits), are those of the source
// design's layer blocks; o_busy and the parameter write port are additions.
//
// How it works: on an enabled cycle (i_en high) with i_in_en high and the
// layer idle, the input vector is latched and the read of neuron group 0 is
// issued to the parameter store. From then on one group of NPAR neurons is
// finished per enabled cycle while the next group's weights are read: each
// neuron forms the full dot product of its N_IN weights with the input, adds
// its bias, rounds and saturates to Q3.12 and, if RELU, clamps negatives to
// zero. The N_OUT/NPAR groups thus take NGRP+1 enabled cycles from the
// sampling edge of i_in_en to the edge after which o_out_en is high for one
// enabled cycle; o_out holds the whole result until the layer finishes again.
// Because the input is latched, the next layer can work on one symbol while
// this one starts the next: the layers of a network form a pipeline.
//
// The number of neurons per cycle (NPAR), the latching, the use of i_init as
// a synchronous clear of state and outputs, and the handling of an i_in_en
// that arrives while busy (ignored, flagged by an assertion) are this design's
// choices; the source gives the layer's ports and function but not its
// insides. i_en gates every state change, so the layer runs at the divided
// system clock.
module dnn_layer
  import dnn_pkg::*;
#(
  parameter int N_IN  = N_HIDDEN,
  parameter int N_OUT = N_HIDDEN,
  parameter int NPAR  = 32,
  parameter bit RELU  = 1'b1
) (
  input  logic                    i_clk,
  input  logic                    i_en,
  input  logic [N_IN*DATA_W-1:0]  i_in,
  input  logic                    i_in_en,
  input  logic                    i_init,
  input  logic                    i_rst_n,
  output logic [N_OUT*DATA_W-1:0] o_out,
  output logic                    o_out_en,
  output logic                    o_busy,
  // parameter write port (already addressed to this layer)
  input  logic                    i_wr,
  input  logic                    i_wr_bias,
  input  logic [15:0]             i_wr_row,
  input  logic [15:0]             i_wr_col,
  input  fx_t                     i_wr_data
);
  localparam int NGRP = N_OUT / NPAR;
  localparam int GW   = (NGRP > 1) ? $clog2(NGRP) : 1;

  if (N_OUT % NPAR != 0) begin : g_bad_npar
    $error("dnn_layer: NPAR must divide N_OUT");
  end

  fx_t           x_reg [N_IN];       // latched input vector
  fx_t           w_grp [NPAR][N_IN]; // weights of the group being computed
  fx_t           b_grp [NPAR];
  logic          busy;
  logic          rd;
  logic [GW-1:0] rd_grp;             // next group to read
  logic          mac_vld;            // w_grp holds group mac_grp
  logic [GW-1:0] mac_grp;

  dnn_param_mem #(.N_IN(N_IN), .N_OUT(N_OUT), .NPAR(NPAR)) u_param_mem (
    .i_clk     (i_clk),
    .i_wr      (i_wr),
    .i_wr_bias (i_wr_bias),
    .i_wr_row  (i_wr_row),
    .i_wr_col  (i_wr_col),
    .i_wr_data (i_wr_data),
    .i_rd      (rd),
    .i_rd_grp  (rd_grp),
    .o_w       (w_grp),
    .o_b       (b_grp)
  );

  logic start;
  assign start  = i_en && i_in_en && !busy && !i_init;
  assign o_busy = busy;

  // Issue a group read on the start cycle (group 0) and on every enabled
  // busy cycle until the group counter wraps after the last group.
  assign rd = i_en && !i_init && (start || (busy && rd_grp != GW'(0)));

  // Neuron p of the current group: dot product, bias, round/saturate,
  // activation. Evaluated in the register process below on the cycles that
  // finish a group.
  function automatic fx_t neuron(input int p);
    acc_t acc;
    fx_t  y;
    acc = acc_t'(b_grp[p]) <<< FRAC_W;
    for (int i = 0; i < N_IN; i++)
      acc += acc_t'(w_grp[p][i]) * acc_t'(x_reg[i]);
    y = fx_round_sat(acc);
    return (RELU && y[DATA_W-1]) ? '0 : y;
  endfunction

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      busy     <= 1'b0;
      rd_grp   <= '0;
      mac_vld  <= 1'b0;
      mac_grp  <= '0;
      o_out    <= '0;
      o_out_en <= 1'b0;
      x_reg    <= '{default: '0};
    end else if (i_init) begin
      busy     <= 1'b0;
      rd_grp   <= '0;
      mac_vld  <= 1'b0;
      mac_grp  <= '0;
      o_out    <= '0;
      o_out_en <= 1'b0;
    end else if (i_en) begin
      o_out_en <= 1'b0;
      // read side
      if (start) begin
        for (int i = 0; i < N_IN; i++)
          x_reg[i] <= fx_t'(i_in[i*DATA_W +: DATA_W]);
        busy <= 1'b1;
      end
      if (rd) begin
        mac_vld <= 1'b1;
        mac_grp <= rd_grp;
        rd_grp  <= (rd_grp == GW'(NGRP - 1)) ? '0 : rd_grp + GW'(1);
      end else begin
        mac_vld <= 1'b0;
      end
      // compute side
      if (mac_vld) begin
        for (int p = 0; p < NPAR; p++)
          o_out[(int'(mac_grp)*NPAR + p)*DATA_W +: DATA_W] <= neuron(p);
        if (mac_grp == GW'(NGRP - 1)) begin
          busy     <= 1'b0;
              o_out_en <= 1'b1;
        end
      end
    end
  end

  // A new input must not arrive while the layer is still computing.
  a_no_overrun : assert property (@(posedge i_clk) disable iff (!i_rst_n || i_init)
    (i_en && i_in_en) |-> !busy)
    else $error("dnn_layer: i_in_en while busy, input dropped");

endmodule
