// input_buffer: frame buffer between the ADC and the two FFT cores.
//
// What it does: the ADC delivers two samples per clock (600 MSa/s) while each
// FFT core takes one sample per clock.  The buffer cuts the sample stream into
// frames of N = 1024 consecutive samples and hands even frames to FFT 1 (port
// 0) and odd frames to FFT 2 (port 1).  Each frame is read out in bit-reversed
// order, the input order a radix-2 decimation-in-time pipeline needs, so the
// FFTs produce their bins in natural order.
//
// How it works: four banks of N words, each split into an even and an odd
// half so that the two samples of a clock are written in one cycle.  Frame k
// goes to bank k mod 4; when it is complete, the reader of port k mod 2 starts
// on it and reads one word per clock for N clocks.  With a continuous input a
// frame completes every N/2 clocks, a reader is busy N clocks, and a bank is
// rewritten 4*N/2 clocks after it was started, so nothing is overwritten
// before it was read.  The paper's block diagram names an input buffer
// between the ADC and the two FFTs; its organisation here is this design's
// own.
//
// Timing: a read address is issued the clock after a frame completes; data
// appear one clock later (synchronous RAM read).  out_sof marks the first word
// of a frame.  overrun flags a frame completing while its reader is still
// busy, which the ADC rate cannot cause.
module input_buffer
  import adrs_pkg::*;
#(
  parameter int unsigned N  = FFT_N,
  parameter int unsigned DW = DATA_W,
  localparam int unsigned AW = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_s0,     // earlier sample of the pair
  input  logic signed [DW-1:0] in_s1,     // later sample of the pair
  output logic [1:0]           out_valid,
  output logic [1:0]           out_sof,
  output logic signed [DW-1:0] out_data [2],
  output logic                 overrun
);

  localparam int unsigned HW = AW - 1;  // half-bank address width

  function automatic logic [AW-1:0] bitrev(input logic [AW-1:0] a);
    for (int i = 0; i < int'(AW); i++) bitrev[i] = a[AW-1-i];
  endfunction

  // ---------------- write side ----------------
  logic [HW-1:0] wr_addr;   // pair index within frame
  logic [1:0]    wr_bank;
  logic          frame_done;
  logic [1:0]    done_bank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_addr    <= '0;
      wr_bank    <= '0;
      frame_done <= 1'b0;
      done_bank  <= '0;
    end else begin
      frame_done <= 1'b0;
      if (in_valid) begin
        wr_addr <= wr_addr + 1'b1;
        if (&wr_addr) begin
          frame_done <= 1'b1;
          done_bank  <= wr_bank;
          wr_bank    <= wr_bank + 1'b1;
        end
      end
    end
  end

  // ---------------- readers ----------------
  logic          rd_busy  [2];
  logic [AW-1:0] rd_cnt   [2];
  logic          rd_hi    [2];   // bank k+2 instead of bank k
  logic [1:0]    rd_v_q, rd_sof_q;
  logic          rd_odd_q [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < 2; p++) begin
        rd_busy[p]  <= 1'b0;
        rd_cnt[p]   <= '0;
        rd_hi[p]    <= 1'b0;
      end
      rd_v_q   <= '0;
      rd_sof_q <= '0;
      overrun  <= 1'b0;
    end else begin
      for (int p = 0; p < 2; p++) begin
        rd_v_q[p]   <= rd_busy[p];
        rd_sof_q[p] <= rd_busy[p] && rd_cnt[p] == '0;
        if (rd_busy[p]) begin
          rd_cnt[p] <= rd_cnt[p] + 1'b1;
          if (&rd_cnt[p]) rd_busy[p] <= 1'b0;
        end
        if (frame_done && done_bank[0] == p[0]) begin
          if (rd_busy[p] && !(&rd_cnt[p])) overrun <= 1'b1;
          rd_busy[p] <= 1'b1;
          rd_cnt[p]  <= '0;
          rd_hi[p]   <= done_bank[1];
        end
      end
    end
  end

  // ---------------- banks ----------------
  logic signed [DW-1:0] rdata_e [4];
  logic signed [DW-1:0] rdata_o [4];

  for (genvar b = 0; b < 4; b++) begin : g_bank
    logic signed [DW-1:0] mem_e [N/2];
    logic signed [DW-1:0] mem_o [N/2];
    logic [AW-1:0] raddr;
    assign raddr = bitrev(rd_cnt[b % 2]);
    always_ff @(posedge clk) begin
      if (in_valid && wr_bank == 2'(b)) begin
        mem_e[wr_addr] <= in_s0;
        mem_o[wr_addr] <= in_s1;
      end
      rdata_e[b] <= mem_e[raddr[AW-1:1]];
      rdata_o[b] <= mem_o[raddr[AW-1:1]];
    end
  end

  // which half-bank word a reader asked for
  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) rd_odd_q[p] <= bitrev(rd_cnt[p])[0];
  end

  logic rd_hi_q [2];
  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) rd_hi_q[p] <= rd_hi[p];
  end

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      logic [1:0] bk;
      bk = {rd_hi_q[p], 1'(p)};
      out_data[p] = rd_odd_q[p] ? rdata_o[bk] : rdata_e[bk];
    end
  end

  assign out_valid = rd_v_q;
  assign out_sof   = rd_sof_q;

endmodule
