// dnn_pkg: constants, types and fixed-point helpers shared by the DNN-based
// OFDM encoder/decoder.
//
// Every datum on the buses of the design is a 16-bit two's-complement
// fixed-point number with 1 sign bit, 3 integer bits and 12 fraction bits
// (Q3.12, range -8.0 .. +7.99976). Weights and biases use the same format,
// which is this design's choice. The link carries one OFDM symbol of 16
// subcarriers with 4-QAM, i.e. 32 information bits per symbol.
//
// fx_round_sat() turns an accumulator that carries 2*FRAC_W fraction bits (a
// sum of Q3.12 x Q3.12 products) back into Q3.12: it rounds half up and
// saturates to the 16-bit range. The rounding and saturation rules are this
// design's own choices.
package dnn_pkg;

  localparam int DATA_W      = 16;  // data bus width per value
  localparam int FRAC_W      = 12;  // fraction bits (1 sign + 3 integer + 12)
  localparam int ACC_W       = 48;  // accumulator width of a neuron
  localparam int N_SC        = 16;  // OFDM subcarriers
  localparam int BITS_PER_SC = 2;   // 4-QAM
  localparam int M_SYM       = 4;   // symbol values per subcarrier (2^BITS_PER_SC)
  localparam int SYM_BITS    = N_SC * BITS_PER_SC;  // 32 bits per OFDM symbol
  localparam int ENC_IN      = N_SC * M_SYM;        // 64 one-hot encoder inputs
  localparam int ENC_OUT     = 2 * N_SC;            // 32 real values = 16 complex
  localparam int N_HIDDEN    = 512; // hidden nodes per layer
  localparam int N_LAYERS    = 5;   // layers per network

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam fx_t FX_ONE = fx_t'(1 << FRAC_W);
  localparam fx_t FX_MAX = fx_t'({1'b0, {(DATA_W-1){1'b1}}});
  localparam fx_t FX_MIN = fx_t'({1'b1, {(DATA_W-1){1'b0}}});

  // Parameter delivery bus: one weight or bias per write.
  typedef struct packed {
    logic        wr;     // write strobe
    logic        net;    // 0 = encoder, 1 = decoder
    logic [2:0]  layer;  // 0 = input layer .. N_LAYERS-1 = output layer
    logic        bias;   // 1 = bias of neuron 'row', 0 = weight (row, col)
    logic [15:0] row;    // neuron (output) index
    logic [15:0] col;    // input index
    fx_t         data;   // Q3.12 value
  } param_wr_t;

  // Round half up from 2*FRAC_W to FRAC_W fraction bits and saturate.
  function automatic fx_t fx_round_sat(input acc_t acc);
    acc_t r;
    r = (acc + (acc_t'(1) <<< (FRAC_W - 1))) >>> FRAC_W;
    if (r > acc_t'(FX_MAX))      return FX_MAX;
    else if (r < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(r);
  endfunction

  // Saturate a wide value that already has FRAC_W fraction bits.
  function automatic fx_t fx_sat(input acc_t v);
    if (v > acc_t'(FX_MAX))      return FX_MAX;
    else if (v < acc_t'(FX_MIN)) return FX_MIN;
    else                         return fx_t'(v);
  endfunction

endpackage
