// tdc_decoder_tb: self-checking test of the delay-line flip-flops and decoder.
//
// Drives 200-bit delay-line codes with a chosen number of high bits in each
// half (contiguous, and with scattered "bubbles"), and checks after exactly
// three clocks that each half's count picked the right table entry: first
// from the default straight-line table, then from a random table written
// through the calibration port.  Also checks the monitor counts.
`timescale 1ns/1ps
module tdc_decoder_tb;
  import adrs_pkg::*;

  localparam int TAPS = 200, HALF = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [TAPS-1:0] taps;
  logic cal_we = 1'b0, cal_half = 1'b0;
  logic [6:0] cal_addr = '0;
  logic signed [DATA_W-1:0] cal_data = '0;
  logic out_valid;
  logic signed [DATA_W-1:0] out_s0, out_s1;
  logic [TAPS-1:0] mon_code;
  logic [6:0] mon_cnt_ant, mon_cnt_post;

  int checks = 0, failures = 0;

  tdc_decoder dut (.*);

  always #1.667 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ref_ant [HALF+1];
  int ref_post[HALF+1];

  // build a code: 'a' ones in the anterior half, 'p' ones in the posterior
  // half; bubbles=1 scatters them instead of keeping them contiguous
  function automatic logic [TAPS-1:0] make_code(int a, int p, bit bubbles);
    logic [TAPS-1:0] c = '0;
    int placed;
    if (!bubbles) begin
      for (int i = 0; i < a; i++) c[HALF-1-i] = 1'b1;
      for (int i = 0; i < p; i++) c[HALF+i]   = 1'b1;
    end else begin
      placed = 0;
      while (placed < a) begin
        int k = $urandom_range(HALF-1, 0);
        if (!c[k]) begin c[k] = 1'b1; placed++; end
      end
      placed = 0;
      while (placed < p) begin
        int k = $urandom_range(TAPS-1, HALF);
        if (!c[k]) begin c[k] = 1'b1; placed++; end
      end
    end
    return c;
  endfunction

  task automatic check_code(int a, int p, bit bubbles);
    logic [TAPS-1:0] c;
    c = make_code(a, p, bubbles);
    @(negedge clk) taps = c;
    @(posedge clk);              // sampled
    @(posedge clk);              // counted
    #0.1;
    checks++;
    if (mon_cnt_ant != 7'(a) || mon_cnt_post != 7'(p) || mon_code != c) begin
      failures++;
      $display("FAIL monitor a=%0d p=%0d got %0d %0d", a, p, mon_cnt_ant, mon_cnt_post);
    end
    @(posedge clk);              // looked up
    #0.1;
    checks++;
    if (!out_valid || out_s1 != DATA_W'(ref_ant[a]) || out_s0 != DATA_W'(ref_post[p])) begin
      failures++;
      $display("FAIL a=%0d p=%0d s1=%0d (exp %0d) s0=%0d (exp %0d)", a, p,
               out_s1, ref_ant[a], out_s0, ref_post[p]);
    end
  endtask

  initial begin
    taps = '0;
    for (int c = 0; c <= HALF; c++) begin
      ref_ant[c]  = (c - 50) * 256;
      ref_post[c] = (c - 50) * 256;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // default table, edge positions including both ends
    check_code(0, 0, 0);
    check_code(100, 100, 0);
    check_code(50, 50, 0);
    for (int t = 0; t < 200; t++)
      check_code($urandom_range(100, 0), $urandom_range(100, 0), t[0]);

    // load a random calibration table into both halves
    for (int h = 0; h < 2; h++) begin
      for (int c = 0; c <= HALF; c++) begin
        int v = int'($urandom_range(2000000, 0)) - 1000000;
        if (h == 0) ref_ant[c] = v; else ref_post[c] = v;
        @(negedge clk);
        cal_we = 1'b1; cal_half = h[0]; cal_addr = 7'(c); cal_data = DATA_W'(v);
      end
    end
    @(negedge clk) cal_we = 1'b0;

    for (int c = 0; c <= HALF; c++) check_code(c, HALF - c, 0);
    for (int t = 0; t < 200; t++)
      check_code($urandom_range(100, 0), $urandom_range(100, 0), t[0]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
