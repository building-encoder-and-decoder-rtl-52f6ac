// ofdm_dft: 16-point discrete Fourier transform for the OFDM link, forward
// (FFT, receiver) or inverse (IFFT, transmitter) by the INVERSE parameter.
//
//   forward: Y[k] = 1/4 * sum_n x[n] * exp(-j*2*pi*n*k/16)
//   inverse: Y[k] = 1/4 * sum_n x[n] * exp(+j*2*pi*n*k/16)
//
// Both directions scale by 1/sqrt(16) = 1/4, so FFT(IFFT(X)) returns X up to
// rounding. Data are Q3.12; results are rounded half up and saturated.
// Twiddles are cos(2*pi*m/16) in Q1.14 (16384 = 1.0); sin(2*pi*m/16) is read
// as cos(2*pi*(m-4)/16) from the same table.
//
// The source design places an IFFT after the encoder and an FFT before the
// decoder but does not describe them; this is the simplest architecture that
// computes them: a direct DFT that finishes one output bin per clock with 16
// complex multiplies. i_start (while idle) latches the 16 inputs; bins
// 0..15 are then written on the next 16 clock edges and o_done pulses for one
// cycle when o_re/o_im hold the complete result (17 cycles after the
// sampling edge of i_start). An i_start while busy is ignored; o_busy shows
// it. A butterfly FFT would use fewer multipliers and is the usual choice in
// a product; this module stands for it.
module ofdm_dft
  import dnn_pkg::*;
#(
  parameter bit INVERSE = 1'b1
) (
  input  logic i_clk,
  input  logic i_rst_n,
  input  logic i_init,
  input  logic i_start,
  input  fx_t  i_re [16],
  input  fx_t  i_im [16],
  output fx_t  o_re [16],
  output fx_t  o_im [16],
  output logic o_done,
  output logic o_busy
);
  localparam int N      = 16;
  localparam int TW_FRAC = 14;
  localparam int SHIFT  = TW_FRAC + 2;  // twiddle fraction + 1/4 scaling

  // cos(2*pi*m/16) * 2^14, rounded
  localparam logic signed [15:0] COS16 [16] = '{
    16'sd16384,  16'sd15137,  16'sd11585,  16'sd6270,
    16'sd0,     -16'sd6270,  -16'sd11585, -16'sd15137,
   -16'sd16384, -16'sd15137, -16'sd11585, -16'sd6270,
    16'sd0,      16'sd6270,   16'sd11585,  16'sd15137};

  fx_t        x_re [N];
  fx_t        x_im [N];
  logic [3:0] k;
  logic       busy;

  assign o_busy = busy;

  // One output bin Y[k], real part when im = 0, imaginary part when im = 1.
  // Evaluated in the register process below, one bin per busy cycle.
  function automatic fx_t dft_bin(input logic [3:0] kk, input bit im);
    acc_t sr, si;
    sr = '0;
    si = '0;
    for (int n = 0; n < N; n++) begin
      logic [3:0] m;
      acc_t c, s, a, b;
      m = 4'(n * int'(kk));             // angle index n*k mod 16
      c = acc_t'(COS16[m]);
      s = acc_t'(COS16[4'(m - 4'd4)]);  // sin(2*pi*m/16)
      a = acc_t'(x_re[n]);
      b = acc_t'(x_im[n]);
      if (INVERSE) begin                // (a + jb)(c + js)
        sr += a * c - b * s;
        si += a * s + b * c;
      end else begin                    // (a + jb)(c - js)
        sr += a * c + b * s;
        si += b * c - a * s;
      end
    end
    return fx_sat(((im ? si : sr) + (acc_t'(1) <<< (SHIFT - 1))) >>> SHIFT);
  endfunction

  always_ff @(posedge i_clk or negedge i_rst_n) begin
    if (!i_rst_n) begin
      busy   <= 1'b0;
      k      <= '0;
      o_done <= 1'b0;
      x_re   <= '{default: '0};
      x_im   <= '{default: '0};
      o_re   <= '{default: '0};
      o_im   <= '{default: '0};
    end else if (i_init) begin
      busy   <= 1'b0;
      k      <= '0;
      o_done <= 1'b0;
    end else begin
      o_done <= 1'b0;
      if (!busy) begin
        if (i_start) begin
          x_re <= i_re;
          x_im <= i_im;
          k    <= '0;
          busy <= 1'b1;
        end
      end else begin
        o_re[k] <= dft_bin(k, 1'b0);
        o_im[k] <= dft_bin(k, 1'b1);
        k       <= k + 4'd1;
        if (k == 4'(N - 1)) begin
          busy   <= 1'b0;
          o_done <= 1'b1;
        end
      end
    end
  end
endmodule
