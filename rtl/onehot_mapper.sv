// onehot_mapper: forms the DNN encoder's input vector from the information
// bits of one OFDM symbol.
//
// Each subcarrier n carries the 2-bit symbol v = {i_word[2n+1], i_word[2n]}.
// It is presented to the encoder as a group of M_SYM inputs, 4n .. 4n+3, of
// which input 4n+v is 1.0 (Q3.12 0x1000) and the others 0. For 16
// subcarriers this gives 64 inputs, packed input 0 in the low 16 bits of
// o_onehot, matching a 1024-bit encoder input bus. The expansion of a symbol
// into M input nodes follows the source design's network drawing; the use of
// exactly 1.0 and the bit order are this design's choices. Purely
// combinational.
module onehot_mapper
  import dnn_pkg::*;
#(
  parameter int N_SC_P = N_SC,
  parameter int BPS    = BITS_PER_SC
) (
  input  logic [N_SC_P*BPS-1:0]             i_word,
  output logic [N_SC_P*(2**BPS)*DATA_W-1:0] o_onehot
);
  localparam int M = 2 ** BPS;

  always_comb begin
    o_onehot = '0;
    for (int n = 0; n < N_SC_P; n++) begin
      for (int v = 0; v < M; v++) begin
        if (i_word[n*BPS +: BPS] == BPS'(v))
          o_onehot[(n*M + v)*DATA_W +: DATA_W] = FX_ONE;
      end
    end
  end
endmodule
