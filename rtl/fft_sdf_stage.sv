// fft_sdf_stage: one radix-2 decimation-in-time butterfly stage with a single
// delay-feedback memory (SDF), for a streaming FFT that takes one complex
// sample per clock.
//
// Stage s combines elements L = 2^s apart.  Within each group of 2L inputs the
// first L (the "a" inputs) are written to a delay memory of L words.  Each of
// the next L inputs ("b") is multiplied by the twiddle factor W_2L^j,
// j = 0..L-1, and meets the a input written L samples earlier: a + W*b leaves
// the stage at once and a - W*b is written back into the delay memory, to
// leave during the first half of the next group.  Output order equals input
// order, delayed by L samples.  The stage advances only on in_valid, so the
// last L results of a stream leave when the next frame is fed.
//
// Arithmetic, following the published prototype: 25-bit data, 18-bit twiddle
// factors held in ROM (block RAM) and a 25x18 multiply per DSP slice.  The
// twiddle factors are round(2^16 * cos), round(-2^16 * sin); products are
// rounded back to the data scale and sums wrap at 25 bits (no scaling per
// stage; this design's choice), so inputs must stay below 2^14 in magnitude
// for a 1024-point transform.  The delay memory is read asynchronously (one
// clock per stage); a timing-closed 300 MHz version would pipeline the
// multiplier.  Latency: L valid samples plus one clock.
module fft_sdf_stage
  import adrs_pkg::*;
#(
  parameter int unsigned STAGE = 0,
  parameter int unsigned DW    = DATA_W,
  parameter int unsigned TWW   = TW_W,
  parameter int unsigned TWF   = TW_FRAC,
  localparam int unsigned L    = 1 << STAGE,
  localparam int unsigned PW   = (STAGE == 0) ? 1 : STAGE
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_re,
  input  logic signed [DW-1:0] in_im,
  output logic                 out_valid,
  output logic signed [DW-1:0] out_re,
  output logic signed [DW-1:0] out_im
);

  localparam int unsigned PRODW = DW + TWW + 1;

  // ---------------- twiddle ROM: W_2L^j = exp(-i*pi*j/L) ----------------
  // Computed at elaboration in integer arithmetic: the angle pi*j/L in Q30 is
  // folded into [0, pi/2], cos and sin follow from their Taylor series
  // (13 terms, error below 1e-8) and are rounded to TWF fractional bits.
  typedef logic [2*TWW-1:0] tw_word_t;   // {re, im}
  typedef tw_word_t tw_table_t [L];

  function automatic tw_table_t gen_twiddles();
    tw_table_t t;
    localparam longint ONE   = longint'(1) <<< 30;
    localparam longint PI_Q  = 64'd3373259426;        // round(pi * 2^30)
    for (int j = 0; j < int'(L); j++) begin
      longint th, th2, term, c, sn, rc, rs;
      bit     mirror;
      th     = (PI_Q * longint'(j)) / longint'(L);   // angle in [0, pi)
      mirror = (th > PI_Q / 2);
      if (mirror) th = PI_Q - th;
      th2  = (th * th) >>> 30;
      // cos
      term = ONE;
      c    = 0;
      for (int n = 0; n < 26; n += 2) begin
        c   += term;
        term = -(((term * th2) >>> 30) / ((longint'(n) + 1) * (longint'(n) + 2)));
      end
      // sin
      term = th;
      sn   = 0;
      for (int n = 1; n < 27; n += 2) begin
        sn  += term;
        term = -(((term * th2) >>> 30) / ((longint'(n) + 1) * (longint'(n) + 2)));
      end
      if (mirror) c = -c;
      // W = cos - i*sin, rounded to TWF fractional bits
      rc = (c + (longint'(1) <<< (29 - TWF))) >>> (30 - TWF);
      rs = (-sn + (longint'(1) <<< (29 - TWF))) >>> (30 - TWF);
      t[j] = {TWW'(rc), TWW'(rs)};
    end
    return t;
  endfunction

  localparam tw_table_t TW_ROM = gen_twiddles();

  // ---------------- control ----------------
  logic [STAGE:0] cnt;       // position within a group of 2L
  logic [PW-1:0]  ptr;       // delay-memory pointer
  logic           primed;    // a full group has passed
  logic           second;    // current input is a "b" input
  logic [PW-1:0]  j;

  assign second = cnt[STAGE];
  assign j      = (STAGE == 0) ? '0 : PW'(cnt);

  // ---------------- delay memory ----------------
  logic signed [DW-1:0] dl_re [L];
  logic signed [DW-1:0] dl_im [L];
  logic signed [DW-1:0] a_re, a_im;
  assign a_re = dl_re[ptr];
  assign a_im = dl_im[ptr];

  // ---------------- butterfly ----------------
  logic signed [PRODW-1:0] p_re, p_im;
  logic signed [DW-1:0]    wb_re, wb_im;
  logic signed [DW-1:0]    sum_re, sum_im, dif_re, dif_im;

  always_comb begin
    logic signed [PRODW-1:0] w_re, w_im, x_re, x_im;
    w_re   = PRODW'($signed(TW_ROM[j][2*TWW-1:TWW]));   // sign-extended operands
    w_im   = PRODW'($signed(TW_ROM[j][TWW-1:0]));
    x_re   = PRODW'(in_re);
    x_im   = PRODW'(in_im);
    p_re   = x_re * w_re - x_im * w_im + (PRODW'(1) <<< (TWF - 1));
    p_im   = x_re * w_im + x_im * w_re + (PRODW'(1) <<< (TWF - 1));
    wb_re  = DW'(p_re >>> TWF);
    wb_im  = DW'(p_im >>> TWF);
    sum_re = a_re + wb_re;
    sum_im = a_im + wb_im;
    dif_re = a_re - wb_re;
    dif_im = a_im - wb_im;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      ptr       <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        cnt <= cnt + 1'b1;
        ptr <= (ptr == PW'(L - 1)) ? '0 : ptr + 1'b1;
        if (!second) begin
          out_re    <= a_re;
          out_im    <= a_im;
          out_valid <= primed;
        end else begin
          out_re    <= sum_re;
          out_im    <= sum_im;
          out_valid <= 1'b1;
          primed    <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      dl_re[ptr] <= second ? dif_re : in_re;
      dl_im[ptr] <= second ? dif_im : in_im;
    end
  end

endmodule
