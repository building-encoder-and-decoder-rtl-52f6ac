// parallel_to_serial: sends the reconstructed bits of one OFDM symbol out as
// the serial sequence r^_0, r^_1, ...
//
// A word is accepted on a cycle with i_word_vld high while o_busy is low,
// that is while idle or on the cycle the last bit of the previous word goes
// out, so words N_BITS cycles apart give a gapless bit stream. From the next
// cycle on, one bit per cycle appears on o_bit with o_bit_vld high, bit 0
// first, for N_BITS cycles. A word offered while busy is not taken. Bit order and timing are
// this design's choices.
module parallel_to_serial #(
  parameter int N_BITS = 32
) (
  input  logic              i_clk,
  input  logic              i_rst_n,
  input  logic              i_init,
  input  logic [N_BITS-1:0] i_word,
  input  logic              i_word_vld,
  output logic              o_bit,
  output logic              o_bit_vld,
  output logic              o_busy
);
  localparam int CW = $clog2(N_BITS + 1);
  logic [N_BITS-1:0] shreg;
  logic [CW-1:0]     left;   // bits still to send

  assign o_busy = (left > CW'(1));

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      shreg     <= '0;
      left      <= '0;
      o_bit     <= 1'b0;
      o_bit_vld <= 1'b0;
    end else if (i_init) begin
      left      <= '0;
      o_bit_vld <= 1'b0;
    end else begin
      if (left != '0) begin
        o_bit     <= shreg[0];
        o_bit_vld <= 1'b1;
        shreg     <= shreg >> 1;
        left      <= left - CW'(1);
      end else begin
        o_bit_vld <= 1'b0;
      end
      // a new word is taken while idle or together with the last bit
      if (i_word_vld && left <= CW'(1)) begin
        shreg <= i_word;
        left  <= CW'(N_BITS);
      end
    end
  end
endmodule
