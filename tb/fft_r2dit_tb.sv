// fft_r2dit_tb: self-checking test of the 1024-point radix-2 DIT FFT core.
//
// Frames (an impulse, a complex tone on a bin, a real cosine, random data)
// are fed one sample per clock in bit-reversed order, followed by one flush
// frame.  Every output bin is compared with a double-precision DFT of the
// same integer input computed here; the allowed error covers the 25-bit
// rounding and the 18-bit twiddle factors.  Also checked: out_idx is the bin
// number, and bin j of the stream leaves exactly 10 clocks after input
// sample j + 1023 entered (N - 1 samples of delay-line plus one register per
// stage).
`timescale 1ns/1ps
module fft_r2dit_tb;
  import adrs_pkg::*;

  localparam int LOG2N = 10, N = 1 << LOG2N, FRAMES = 5;
  localparam real TOL = 96.0;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [DATA_W-1:0] in_re = '0, in_im = '0;
  logic out_valid;
  logic signed [DATA_W-1:0] out_re, out_im;
  logic [LOG2N-1:0] out_idx;

  int checks = 0, failures = 0;
  real max_err = 0.0;

  fft_r2dit dut (.*);

  always #1.667 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitrev(int a);
    int r = 0;
    for (int i = 0; i < LOG2N; i++) r |= ((a >> i) & 1) << (LOG2N - 1 - i);
    return r;
  endfunction

  int  xr [FRAMES+1][N];
  int  xi [FRAMES+1][N];
  real yr [FRAMES][N];
  real yi [FRAMES][N];
  longint cyc = 0;
  longint in_cyc [$];
  int out_n = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    #0.1;
    if (out_valid && out_n < FRAMES * N) begin
      int f, k;
      real er, ei;
      f = out_n / N;
      k = out_n % N;
      er = real'(out_re) - yr[f][k];
      ei = real'(out_im) - yi[f][k];
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > max_err) max_err = er;
      if (ei > max_err) max_err = ei;
      checks++;
      if (er > TOL || ei > TOL || int'(out_idx) != k) begin
        failures++;
        if (failures < 10)
          $display("FAIL frame %0d bin %0d idx %0d: got (%0d,%0d) exp (%f,%f)", f, k,
                   out_idx, out_re, out_im, yr[f][k], yi[f][k]);
      end
      // latency: output j appears 10 clocks after input j + N - 1
      checks++;
      if (cyc != in_cyc[out_n + N - 1] + longint'(LOG2N)) begin
        failures++;
        if (failures < 10)
          $display("FAIL latency of output %0d: %0d", out_n, cyc - in_cyc[out_n + N - 1]);
      end
      out_n++;
    end
  end

  initial begin
    // stimuli, magnitudes below 2^13 so that 10 stages of growth fit 25 bits
    for (int n = 0; n < N; n++) begin
      xr[0][n] = (n == 0) ? 8000 : 0;          xi[0][n] = 0;
      xr[1][n] = $rtoi(4000.0 * $cos(2.0 * PI * 37.0 * n / N));
      xi[1][n] = $rtoi(4000.0 * $sin(2.0 * PI * 37.0 * n / N));
      xr[2][n] = $rtoi(6000.0 * $cos(2.0 * PI * 300.0 * n / N)); xi[2][n] = 0;
      for (int f = 3; f <= FRAMES; f++) begin
        xr[f][n] = int'($urandom_range(8000, 0)) - 4000;
        xi[f][n] = (f == 3) ? 0 : int'($urandom_range(8000, 0)) - 4000;
      end
    end
    for (int f = 0; f < FRAMES; f++)
      for (int k = 0; k < N; k++) begin
        real sr, si;
        sr = 0.0;
        si = 0.0;
        for (int n = 0; n < N; n++) begin
          real a;
          a = -2.0 * PI * real'((k * n) % N) / N;
          sr += xr[f][n] * $cos(a) - xi[f][n] * $sin(a);
          si += xr[f][n] * $sin(a) + xi[f][n] * $cos(a);
        end
        yr[f][k] = sr;
        yi[f][k] = si;
      end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int f = 0; f <= FRAMES; f++)
      for (int j = 0; j < N; j++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_re = DATA_W'(xr[f][bitrev(j)]);
        in_im = DATA_W'(xi[f][bitrev(j)]);
        in_cyc.push_back(cyc);      // sampled at the next edge
      end
    @(negedge clk) in_valid = 1'b0;
    repeat (20) @(posedge clk);
    checks++;
    if (out_n != FRAMES * N) begin
      failures++;
      $display("FAIL %0d outputs, expected %0d", out_n, FRAMES * N);
    end
    $display("max abs error %f LSB", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
