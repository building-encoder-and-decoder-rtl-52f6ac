// tb_ofdm_fft: runs ofdm_dft with INVERSE=0 on random Q3.12 vectors and on
// single-tone vectors and compares every bin with a real-arithmetic DFT
// (scaled by 1/4) within 2 LSB. Also checks the 17-cycle latency from the
// sampling edge of i_start to o_done, that o_busy blocks a second start,
// and a round trip through a second instance with the opposite direction.
module tb_ofdm_fft;
  import dnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0, start = 1'b0, start2 = 1'b0;
  fx_t xr [16], xi [16], yr [16], yi [16], zr [16], zi [16];
  logic done, busy, done2, busy2;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ofdm_dft #(.INVERSE(1'b0)) dut (.i_clk(clk), .i_rst_n(rst_n), .i_init(init), .i_start(start),
    .i_re(xr), .i_im(xi), .o_re(yr), .o_im(yi), .o_done(done), .o_busy(busy));
  ofdm_dft #(.INVERSE(1'b1)) back (.i_clk(clk), .i_rst_n(rst_n), .i_init(init), .i_start(start2),
    .i_re(yr), .i_im(yi), .o_re(zr), .o_im(zi), .o_done(done2), .o_busy(busy2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d (watchdog)", checks, failures);
    $finish;
  end

  task automatic run(input int ar[16], input int ai[16], input int amp);
    real er [16], ei [16];
    int lat;
    for (int n = 0; n < 16; n++) begin xr[n] = fx_t'(ar[n]); xi[n] = fx_t'(ai[n]); end
    ref_dft(1'b0, ar, ai, er, ei);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    // a second start while busy must be ignored
    for (int n = 0; n < 16; n++) begin xr[n] = '0; xi[n] = '0; end
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat++;
    while (!done) begin @(negedge clk); lat++; if (lat > 100) break; end
    checks++;
    if (lat != 17) begin failures++; $display("FAIL latency %0d", lat); end
    for (int k = 0; k < 16; k++) begin
      real dr, di;
      dr = real'(yr[k]) - er[k];
      di = real'(yi[k]) - ei[k];
      checks++;
      if (dr > 2.0 || dr < -2.0 || di > 2.0 || di < -2.0) begin
        failures++;
        $display("FAIL bin %0d got (%0d,%0d) exp (%f,%f)", k, yr[k], yi[k], er[k], ei[k]);
      end
    end
    // round trip
    @(negedge clk);
    start2 = 1'b1;
    @(negedge clk);
    start2 = 1'b0;
    while (!done2) @(negedge clk);
    for (int n = 0; n < 16; n++) begin
      int d1, d2;
      d1 = int'(zr[n]) - ar[n];
      d2 = int'(zi[n]) - ai[n];
      checks++;
      if (d1 > 4 || d1 < -4 || d2 > 4 || d2 < -4) begin
        failures++;
        $display("FAIL round trip %0d got (%0d,%0d) exp (%0d,%0d)", n, zr[n], zi[n], ar[n], ai[n]);
      end
    end
  endtask

  initial begin
    int ar [16], ai [16];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 16; t++) begin      // single tones
      for (int n = 0; n < 16; n++) begin ar[n] = 0; ai[n] = 0; end
      ar[t] = 4096;
      ai[(t + 5) % 16] = -2048;
      run(ar, ai, 4096);
    end
    for (int t = 0; t < 20; t++) begin      // random, kept inside the range
      for (int n = 0; n < 16; n++) begin
        ar[n] = int'($urandom_range(16384)) - 8192;
        ai[n] = int'($urandom_range(16384)) - 8192;
      end
      run(ar, ai, 8192);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
