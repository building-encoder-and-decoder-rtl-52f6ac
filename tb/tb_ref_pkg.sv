// tb_ref_pkg: reference models used by the testbenches.
//
// ref_round_sat / ref_layer compute a fully connected layer in plain integer
// arithmetic (longint), independently of the RTL: y = sat(round(sum w*x +
// b*2^12) / 2^12), then ReLU if requested. ref_dft computes the 16-point DFT
// in real arithmetic with $cos/$sin. kat_param gives a hand-built
// "known answer" parameter set with which the encoder/decoder pair is a
// working 4-QAM link: the encoder puts bit 0 of each subcarrier's symbol on
// the real part and bit 1 on the imaginary part (on-off, 0 or 1.0), the
// decoder scores every symbol value v as (v0 ? I : 1-I) + (v1 ? Q : 1-Q)
// and the argmax gives v back. With flip = 1 the encoder sends 1 - bit 0
// instead, so a receiver with the normal decoder sees bit 0 inverted.
package tb_ref_pkg;

  localparam int ONE = 4096;

  function automatic int ref_round_sat(input longint acc);
    longint r;
    r = (acc + 2048) >>> 12;
    if (r > 32767)  return 32767;
    if (r < -32768) return -32768;
    return int'(r);
  endfunction

  // w is indexed [row*n_in + col]
  function automatic void ref_layer(input int n_in, input int n_out,
                                    input int x[], input int w[], input int b[],
                                    input bit relu, output int y[]);
    y = new[n_out];
    for (int r = 0; r < n_out; r++) begin
      longint acc;
      acc = longint'(b[r]) * 4096;
      for (int c = 0; c < n_in; c++)
        acc += longint'(w[r*n_in + c]) * longint'(x[c]);
      y[r] = ref_round_sat(acc);
      if (relu && y[r] < 0) y[r] = 0;
    end
  endfunction

  function automatic void ref_dft(input bit inverse, input int xr[16], input int xi[16],
                                  output real yr[16], output real yi[16]);
    for (int k = 0; k < 16; k++) begin
      yr[k] = 0.0;
      yi[k] = 0.0;
      for (int n = 0; n < 16; n++) begin
        real ang, c, s;
        ang = 2.0 * 3.14159265358979 * real'(n * k) / 16.0;
        c = $cos(ang);
        s = inverse ? $sin(ang) : -$sin(ang);
        yr[k] += real'(xr[n]) * c - real'(xi[n]) * s;
        yi[k] += real'(xr[n]) * s + real'(xi[n]) * c;
      end
      yr[k] = yr[k] / 4.0;
      yi[k] = yi[k] / 4.0;
    end
  endfunction

  // Known-answer parameters. net 0 = encoder, 1 = decoder. col < 0 asks
  // for the bias of neuron row.
  function automatic int kat_param(input int net, input int layer, input int n_lay,
                                   input int row, input int col, input bit flip);
    bit last;
    last = (layer == n_lay - 1);
    if (net == 0) begin
      if (!last) begin
        if (col < 0) return 0;
        return (row == col && row < 64) ? ONE : 0;
      end else begin
        int n, q;
        n = row / 2;
        q = row % 2;
        if (col < 0) return (q == 0 && flip) ? ONE : 0;
        if (q == 0) begin
          if (col == 4*n + 1 || col == 4*n + 3) return flip ? -ONE : ONE;
        end else begin
          if (col == 4*n + 2 || col == 4*n + 3) return ONE;
        end
        return 0;
      end
    end else begin
      if (layer == 0) begin
        int n, v;
        if (row >= 64) return 0;
        n = row / 4;
        v = row % 4;
        if (col < 0) return ((v & 1) ? 0 : ONE) + ((v & 2) ? 0 : ONE);
        if (col == 2*n)     return (v & 1) ? ONE : -ONE;
        if (col == 2*n + 1) return (v & 2) ? ONE : -ONE;
        return 0;
      end else begin
        if (col < 0) return 0;
        return (row == col && row < 64) ? ONE : 0;
      end
    end
  endfunction

endpackage
