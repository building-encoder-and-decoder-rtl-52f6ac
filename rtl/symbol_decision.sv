// symbol_decision: hard decision on the DNN decoder's outputs.
//
// The decoder gives M_SYM scores per subcarrier, group n at outputs
// 4n .. 4n+3 (output 0 in the low 16 bits of i_scores). For every subcarrier
// the index v of the largest score (signed Q3.12 compare, ties to the lower
// index) is written to o_word[2n+1:2n], the inverse of onehot_mapper. The
// argmax rule is this design's choice. Purely combinational.
module symbol_decision
  import dnn_pkg::*;
#(
  parameter int N_SC_P = N_SC,
  parameter int BPS    = BITS_PER_SC
) (
  input  logic [N_SC_P*(2**BPS)*DATA_W-1:0] i_scores,
  output logic [N_SC_P*BPS-1:0]             o_word
);
  localparam int M = 2 ** BPS;

  always_comb begin
    o_word = '0;
    for (int n = 0; n < N_SC_P; n++) begin
      fx_t best;
      best = fx_t'(i_scores[(n*M)*DATA_W +: DATA_W]);
      for (int v = 1; v < M; v++) begin
        if (fx_t'(i_scores[(n*M + v)*DATA_W +: DATA_W]) > best) begin
          best = fx_t'(i_scores[(n*M + v)*DATA_W +: DATA_W]);
          o_word[n*BPS +: BPS] = BPS'(v);
        end
      end
    end
  end
endmodule
