// fft_r2dit: real-time radix-2 decimation-in-time FFT core, N = 1024 points.
//
// What it does: takes one complex sample per clock, frames of N samples in
// bit-reversed order (as the input buffer supplies them), and delivers the N
// bins of each frame in natural order, one per clock, with the bin number.
// It is a chain of log2(N) = 10 single-delay-feedback butterfly stages
// (fft_sdf_stage), stage s pairing elements 2^s apart with twiddle factors
// W_(2^(s+1))^j.  Radix 2, decimation in time, 1024 points, 25-bit data,
// 18-bit twiddles in ROM and one sample per 300 MHz clock follow the
// published prototype; the pipelined single-delay-feedback structure is this
// design's choice.  The prototype uses two such cores, one per ADC sample of a
// clock.
//
// Timing: a bin leaves N - 1 valid input samples plus log2(N) clocks after the
// matching input sample entered; the pipeline moves only on in_valid, so the
// bins of a frame complete while the next frame is fed.  out_idx counts
// output samples modulo N and is the bin number when the input starts on a
// frame boundary after reset.
module fft_r2dit
  import adrs_pkg::*;
#(
  parameter int unsigned LOG2N = LOG2_N,
  parameter int unsigned DW    = DATA_W,
  localparam int unsigned N    = 1 << LOG2N
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [DW-1:0]  in_re,
  input  logic signed [DW-1:0]  in_im,
  output logic                  out_valid,
  output logic signed [DW-1:0]  out_re,
  output logic signed [DW-1:0]  out_im,
  output logic [LOG2N-1:0]      out_idx
);

  logic                 v  [LOG2N+1];
  logic signed [DW-1:0] re [LOG2N+1];
  logic signed [DW-1:0] im [LOG2N+1];

  assign v[0]  = in_valid;
  assign re[0] = in_re;
  assign im[0] = in_im;

  for (genvar s = 0; s < LOG2N; s++) begin : g_stage
    fft_sdf_stage #(.STAGE(s), .DW(DW)) u_stage (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (v[s]),
      .in_re    (re[s]),
      .in_im    (im[s]),
      .out_valid(v[s+1]),
      .out_re   (re[s+1]),
      .out_im   (im[s+1])
    );
  end

  assign out_valid = v[LOG2N];
  assign out_re    = re[LOG2N];
  assign out_im    = im[LOG2N];

  logic [LOG2N-1:0] idx_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         idx_q <= '0;
    else if (out_valid) idx_q <= idx_q + 1'b1;
  end
  assign out_idx = idx_q;

endmodule
