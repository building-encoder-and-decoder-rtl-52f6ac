// dnn_param_mem: weight and bias store of one fully connected layer.
//
// Holds N_OUT x N_IN weights and N_OUT biases, all Q3.12. The pre-trained
// parameters are delivered from outside (trained off-chip) and written one
// word per cycle through the write port: i_wr with i_wr_bias = 0 writes
// weight (i_wr_row, i_wr_col), with i_wr_bias = 1 writes the bias of neuron
// i_wr_row. Out-of-range addresses are ignored. Writes may happen at any time,
// which is how the parameters are updated in the field.
//
// Reading is synchronous and wide: on a cycle with i_rd high, the weights and
// biases of the NPAR neurons of group i_rd_grp (neurons i_rd_grp*NPAR ..
// i_rd_grp*NPAR+NPAR-1) appear on o_w / o_b after the clock edge and hold
// until the next read. This array stands for the parameter RAM of the layer;
// no memory macro is named in the source, and the organisation (one group
// row per read) is this design's choice.
module dnn_param_mem
  import dnn_pkg::*;
#(
  parameter int N_IN  = N_HIDDEN,
  parameter int N_OUT = N_HIDDEN,
  parameter int NPAR  = 32,
  localparam int NGRP = N_OUT / NPAR,
  localparam int GW   = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic          i_clk,
  // write port
  input  logic          i_wr,
  input  logic          i_wr_bias,
  input  logic [15:0]   i_wr_row,
  input  logic [15:0]   i_wr_col,
  input  fx_t           i_wr_data,
  // group read port
  input  logic          i_rd,
  input  logic [GW-1:0] i_rd_grp,
  output fx_t           o_w [NPAR][N_IN],
  output fx_t           o_b [NPAR]
);
  localparam int RW = (N_OUT > 1) ? $clog2(N_OUT) : 1;
  localparam int CW = (N_IN > 1) ? $clog2(N_IN) : 1;

  fx_t w_mem [N_OUT][N_IN];
  fx_t b_mem [N_OUT];

  // Parameter writes.
  always_ff @(posedge i_clk) begin
    if (i_wr && (32'(i_wr_row) < N_OUT)) begin
      if (i_wr_bias)
        b_mem[i_wr_row[RW-1:0]] <= i_wr_data;
      else if (32'(i_wr_col) < N_IN)
        w_mem[i_wr_row[RW-1:0]][i_wr_col[CW-1:0]] <= i_wr_data;
    end
  end

  // Group reads.
  always_ff @(posedge i_clk) begin
    if (i_rd) begin
      for (int p = 0; p < NPAR; p++) begin
        o_w[p] <= w_mem[RW'(int'(i_rd_grp) * NPAR + p)];
        o_b[p] <= b_mem[RW'(int'(i_rd_grp) * NPAR + p)];
      end
    end
  end
endmodule
