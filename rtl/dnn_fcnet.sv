// dnn_fcnet: DNN-based encoder or decoder built from a chain of fully
// connected layers.
//
// The network has N_LAYERS layers: an input layer (N_IN -> N_HID), N_LAYERS-2
// middle layers (N_HID -> N_HID) and an output layer (N_HID -> N_OUT), all
// dnn_layer instances named as in the source design's schematics
// (u00_input_layer_top, u01_middle_layer_top, u02_output_layer_top). Hidden
// layers use ReLU; the output layer uses ReLU when OUT_RELU is set. Each
// layer's o_out/o_out_en drive the next layer's i_in/i_in_en, and i_clk,
// i_en, i_init, i_rst_n are shared. The defaults give the encoder
// (64 -> 512 x 4 -> 32, 16-bit); the decoder is the same module with
// N_IN = 32 and N_OUT = 64.
//
// Timing: a vector on i_in_dat sampled with i_in_en appears on o_out_dat with
// a one-enabled-cycle o_out_en pulse after sum over layers of
// (N_OUT_layer/NPAR + 1) enabled cycles (70 for the encoder defaults, 71
// for the decoder). A new vector
// may be given whenever o_busy is low; several vectors are then in flight,
// one per layer. o_busy is high while the input layer computes and until II
// enabled cycles have passed since the last accepted vector, II being the
// time of the slowest layer (17 for the defaults). Since every layer's
// latency is fixed, vectors stay II apart through the whole chain, so no
// layer is ever handed a vector while busy. This rate rule is this design's
// choice.
//
// Parameters are written through i_param: i_param.layer selects the layer;
// the caller qualifies i_param.wr for this network.
module dnn_fcnet
  import dnn_pkg::*;
#(
  parameter int N_IN     = ENC_IN,
  parameter int N_HID    = N_HIDDEN,
  parameter int N_OUT    = ENC_OUT,
  parameter int N_LAY    = N_LAYERS,
  parameter int NPAR     = 32,
  parameter bit OUT_RELU = 1'b1
) (
  input  logic                    i_clk,
  input  logic                    i_en,
  input  logic [N_IN*DATA_W-1:0]  i_in_dat,
  input  logic                    i_in_en,
  input  logic                    i_init,
  input  logic                    i_rst_n,
  output logic [N_OUT*DATA_W-1:0] o_out_dat,
  output logic                    o_out_en,
  output logic                    o_busy,
  input  param_wr_t               i_param
);
  if (N_LAY < 2) begin : g_bad_layers
    $error("dnn_fcnet: at least an input and an output layer are needed");
  end

  function automatic int max_layer_time();
    int a, c;
    a = N_HID / NPAR + 1;
    c = N_OUT / NPAR + 1;
    return (a > c) ? a : c;
  endfunction
  localparam int II  = max_layer_time();
  localparam int IIW = $clog2(II + 1);

  logic           in_busy;
  logic [IIW-1:0] ii_cnt;   // enabled cycles since the last accepted vector

  assign o_busy = in_busy || (ii_cnt < IIW'(II));

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n)    ii_cnt <= IIW'(II);
    else if (i_init) ii_cnt <= IIW'(II);
    else if (i_en) begin
      if (i_in_en && !o_busy)       ii_cnt <= IIW'(1);
      else if (ii_cnt < IIW'(II))   ii_cnt <= ii_cnt + IIW'(1);
    end
  end

  // Hidden activations between layers: hid[k] is the output of layer k.
  logic [N_HID*DATA_W-1:0] hid    [N_LAY-1];
  logic                    hid_en [N_LAY-1];
  logic [N_LAY-1:0]        wr_sel;

  always_comb begin
    for (int l = 0; l < N_LAY; l++)
      wr_sel[l] = i_param.wr && (int'(i_param.layer) == l);
  end

  dnn_layer #(.N_IN(N_IN), .N_OUT(N_HID), .NPAR(NPAR), .RELU(1'b1)) u00_input_layer_top (
    .i_clk     (i_clk),
    .i_en      (i_en),
    .i_in      (i_in_dat),
    .i_in_en   (i_in_en && !o_busy),
    .i_init    (i_init),
    .i_rst_n   (i_rst_n),
    .o_out     (hid[0]),
    .o_out_en  (hid_en[0]),
    .o_busy    (in_busy),
    .i_wr      (wr_sel[0]),
    .i_wr_bias (i_param.bias),
    .i_wr_row  (i_param.row),
    .i_wr_col  (i_param.col),
    .i_wr_data (i_param.data)
  );

  for (genvar k = 1; k < N_LAY - 1; k++) begin : g_mid
    logic unused_busy;
    dnn_layer #(.N_IN(N_HID), .N_OUT(N_HID), .NPAR(NPAR), .RELU(1'b1)) u01_middle_layer_top (
      .i_clk     (i_clk),
      .i_en      (i_en),
      .i_in      (hid[k-1]),
      .i_in_en   (hid_en[k-1]),
      .i_init    (i_init),
      .i_rst_n   (i_rst_n),
      .o_out     (hid[k]),
      .o_out_en  (hid_en[k]),
      .o_busy    (unused_busy),
      .i_wr      (wr_sel[k]),
      .i_wr_bias (i_param.bias),
      .i_wr_row  (i_param.row),
      .i_wr_col  (i_param.col),
      .i_wr_data (i_param.data)
    );
  end

  logic out_busy_unused;
  dnn_layer #(.N_IN(N_HID), .N_OUT(N_OUT), .NPAR(NPAR), .RELU(OUT_RELU)) u02_output_layer_top (
    .i_clk     (i_clk),
    .i_en      (i_en),
    .i_in      (hid[N_LAY-2]),
    .i_in_en   (hid_en[N_LAY-2]),
    .i_init    (i_init),
    .i_rst_n   (i_rst_n),
    .o_out     (o_out_dat),
    .o_out_en  (o_out_en),
    .o_busy    (out_busy_unused),
    .i_wr      (wr_sel[N_LAY-1]),
    .i_wr_bias (i_param.bias),
    .i_wr_row  (i_param.row),
    .i_wr_col  (i_param.col),
    .i_wr_data (i_param.data)
  );
endmodule
