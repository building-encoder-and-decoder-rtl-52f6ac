// serial_to_parallel: gathers the serial information bits r_0, r_1, ... into
// one OFDM symbol's worth of bits.
//
// One bit is taken on every cycle with i_bit_vld high. The first bit of a
// symbol lands in o_word[0], the last in o_word[N_BITS-1]; subcarrier n thus
// gets bits 2n (LSB) and 2n+1. When the N_BITS-th bit is taken, o_word is
// updated and o_word_vld pulses for one cycle; o_word then holds until the
// next symbol is complete. Bit order and the valid strobe are this design's
// choices; the block itself is the serial-to-parallel stage of the link.
module serial_to_parallel #(
  parameter int N_BITS = 32
) (
  input  logic              i_clk,
  input  logic              i_rst_n,
  input  logic              i_init,
  input  logic              i_bit,
  input  logic              i_bit_vld,
  output logic [N_BITS-1:0] o_word,
  output logic              o_word_vld
);
  localparam int CW = $clog2(N_BITS);
  logic [N_BITS-1:0] shreg;
  logic [CW-1:0]     cnt;

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      shreg      <= '0;
      cnt        <= '0;
      o_word     <= '0;
      o_word_vld <= 1'b0;
    end else if (i_init) begin
      shreg      <= '0;
      cnt        <= '0;
      o_word_vld <= 1'b0;
    end else begin
      o_word_vld <= 1'b0;
      if (i_bit_vld) begin
        shreg <= {i_bit, shreg[N_BITS-1:1]};
        if (cnt == CW'(N_BITS - 1)) begin
          cnt        <= '0;
          o_word     <= {i_bit, shreg[N_BITS-1:1]};
          o_word_vld <= 1'b1;
        end else begin
          cnt <= cnt + CW'(1);
        end
      end
    end
  end
endmodule
