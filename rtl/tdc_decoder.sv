// tdc_decoder: capture flip-flops of the tapped delay line and the TDC decoder.
//
// What it does: every rising edge of the 300 MHz clock the 200 tap outputs of
// the carry-chain delay line are sampled (the flip-flop row of the delay
// line).  The code is split into the anterior half, taps 0-99, which holds the
// positive edge of the comparator output T_in, and the posterior half, taps
// 100-199, which holds its negative edge.  The high bits of each half are
// counted (0..100) and each count is turned into a 25-bit signed fixed-point
// ADC code D_in by a 101-entry calibration table, one table per half.  One
// clock thus yields two samples, 600 MSa/s in all.  The split into halves, the
// counting of high bits, the table lookup in one clock and the 25-bit signed
// output follow the published prototype.
//
// Own choices: the posterior half holds the older part of the clock period
// (tap i carries T_in delayed by i*tau), so its sample is output first (s0)
// and the anterior one second (s1).  Before the CPU loads a measured table,
// both tables hold the ideal straight line D = (count - 50) * 256.  The table
// is written through a simple write port (cal_we/cal_half/cal_addr/cal_data).
//
// Timing: taps sampled at edge n, counts registered at n+1, D_in registered at
// n+2; out_valid is high from the third clock after reset.  mon_code and
// mon_cnt_* expose the raw code and counts (for phase and amplitude
// calibration) one and two clocks after sampling.
module tdc_decoder
  import adrs_pkg::*;
#(
  parameter int unsigned TAPS      = TDL_TAPS,
  parameter int unsigned HALF      = TAPS / 2,
  parameter int unsigned CW        = $clog2(HALF + 1),
  parameter int unsigned DW        = DATA_W,
  parameter int          INIT_STEP = 256
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [TAPS-1:0]      taps,          // asynchronous carry-chain outputs
  // calibration table write port
  input  logic                 cal_we,
  input  logic                 cal_half,      // 0: anterior (positive edge), 1: posterior
  input  logic [CW-1:0]        cal_addr,
  input  logic signed [DW-1:0] cal_data,
  // samples
  output logic                 out_valid,
  output logic signed [DW-1:0] out_s0,        // posterior half (earlier sample)
  output logic signed [DW-1:0] out_s1,        // anterior half (later sample)
  // monitor for calibration
  output logic [TAPS-1:0]      mon_code,
  output logic [CW-1:0]        mon_cnt_ant,
  output logic [CW-1:0]        mon_cnt_post
);

  logic [TAPS-1:0]      code_q;
  logic [CW-1:0]        cnt_ant_q, cnt_post_q;
  logic [1:0]           vpipe;
  logic signed [DW-1:0] tab_ant  [HALF+1];
  logic signed [DW-1:0] tab_post [HALF+1];

  // default table: ideal triangular reference -> straight line
  initial begin
    for (int c = 0; c <= int'(HALF); c++) begin
      tab_ant[c]  = DW'((c - int'(HALF) / 2) * INIT_STEP);
      tab_post[c] = DW'((c - int'(HALF) / 2) * INIT_STEP);
    end
  end

  function automatic logic [CW-1:0] popcount(input logic [HALF-1:0] v);
    logic [CW-1:0] n = '0;
    for (int i = 0; i < int'(HALF); i++) n += CW'(v[i]);
    return n;
  endfunction

  // delay-line flip-flops
  always_ff @(posedge clk) code_q <= taps;

  // high-bit counters of both halves
  always_ff @(posedge clk) begin
    cnt_ant_q  <= popcount(code_q[HALF-1:0]);
    cnt_post_q <= popcount(code_q[TAPS-1:HALF]);
  end

  // calibration tables (block RAM, one write and one read port each)
  always_ff @(posedge clk) begin
    if (cal_we && cal_addr <= CW'(HALF)) begin
      if (cal_half) tab_post[cal_addr] <= cal_data;
      else          tab_ant[cal_addr]  <= cal_data;
    end
    out_s0 <= tab_post[cnt_post_q];
    out_s1 <= tab_ant[cnt_ant_q];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe     <= '0;
      out_valid <= 1'b0;
    end else begin
      vpipe     <= {vpipe[0], 1'b1};
      out_valid <= vpipe[1];
    end
  end

  assign mon_code     = code_q;
  assign mon_cnt_ant  = cnt_ant_q;
  assign mon_cnt_post = cnt_post_q;

endmodule
