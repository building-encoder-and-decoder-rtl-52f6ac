// clk_en_divider: system clock divider for the DNN datapath.
//
// Produces a one-cycle clock-enable strobe o_en once every i_div cycles of
// i_clk (i_div = 0 or 1: o_en stays high). The DNN layers advance only on
// cycles with o_en high, so the whole network runs at i_clk / i_div without a
// second clock domain. The need for a system clock divider comes from the
// source design; realising it as an enable strobe with a run-time ratio is
// this design's choice.
//
// Timing: o_en is registered. After reset, or after i_div changes, the first
// strobe comes within i_div cycles.
module clk_en_divider #(
  parameter int DIV_W = 4
) (
  input  logic             i_clk,
  input  logic             i_rst_n,
  input  logic [DIV_W-1:0] i_div,
  output logic             o_en
);
  logic [DIV_W-1:0] cnt;

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      cnt  <= '0;
      o_en <= 1'b0;
    end else if (i_div <= DIV_W'(1)) begin
      cnt  <= '0;
      o_en <= 1'b1;
    end else if (cnt >= i_div - DIV_W'(1)) begin
      cnt  <= '0;
      o_en <= 1'b1;
    end else begin
      cnt  <= cnt + DIV_W'(1);
      o_en <= 1'b0;
    end
  end
endmodule
