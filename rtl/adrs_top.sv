// adrs_top: programmable-logic part of the all-digital radio spectrometer.
//
// The whole spectrometer sits in one FPGA: the IF signal is compared with a
// triangular reference by an LVDS input used as comparator (analog-to-time
// converter); the comparator output T_in runs through a programmable input
// delay and a 200-element carry-chain delay line whose taps are sampled every
// 3.33 ns (time-to-digital converter).  This module starts at the delay-line
// taps and contains all the logic behind them:
//
//   tdl_taps -> tdc_decoder (2 samples / clock, 600 MSa/s, 25-bit codes)
//            -> input_buffer (1024-sample frames, even frames to FFT 1,
//                             odd frames to FFT 2, bit-reversed order)
//            -> 2 x fft_r2dit (1024-point radix-2 DIT, one sample / clock)
//            -> 2 x power_spectrum (512 bins)
//            -> spec_accumulator (65,536 spectra, two result banks)
//            <-> adrs_axi_regs (AXI4-Lite: delay level, calibration table,
//                              TDC snapshot, spectrum readout)
//
// Outside this module, and brought out as ports: the 300 MHz clock (from the
// clock manager that also drives the reference), the 200 carry-chain taps
// (analog delay elements), the 5-bit level of the input delay primitive, and
// the AXI4-Lite port of the processor system.  The chain of blocks and their
// sizes follow the published prototype; everything is in one clock domain,
// and the bus port runs on that clock (this design's choice).
//
// Timing: a sample pair leaves the decoder 3 clocks after its taps were
// sampled; a frame reaches its FFT after 512 clocks of filling; its lower 512
// bins leave the FFT while the following frame of the same FFT is read in;
// an integration of n_acc spectra ends every n_acc * 512 clocks.
module adrs_top
  import adrs_pkg::*;
#(
  parameter int unsigned TAPS   = TDL_TAPS,
  parameter int unsigned LOG2N  = LOG2_N,
  parameter int unsigned NACC   = N_ACC,
  parameter int unsigned ADDR_W = 16,
  localparam int unsigned NCH   = (1 << LOG2N) / 2,
  localparam int unsigned HCW   = $clog2(TAPS / 2 + 1),
  localparam int unsigned CW    = $clog2(NACC + 1),
  localparam int unsigned BW    = $clog2(NCH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // delay line and input delay
  input  logic [TAPS-1:0]     tdl_taps,
  output logic [IDELAY_W-1:0] idelay_tap,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]   s_awaddr,
  input  logic                s_awvalid,
  output logic                s_awready,
  input  logic [31:0]         s_wdata,
  input  logic                s_wvalid,
  output logic                s_wready,
  output logic [1:0]          s_bresp,
  output logic                s_bvalid,
  input  logic                s_bready,
  input  logic [ADDR_W-1:0]   s_araddr,
  input  logic                s_arvalid,
  output logic                s_arready,
  output logic [31:0]         s_rdata,
  output logic [1:0]          s_rresp,
  output logic                s_rvalid,
  input  logic                s_rready,
  // integration complete (one clock), e.g. for an interrupt
  output logic                integ_done
);

  // ---------------- ADC: TDC decoder ----------------
  logic                     cal_we, cal_half;
  logic [HCW-1:0]           cal_addr;
  logic signed [DATA_W-1:0] cal_data;
  logic                     adc_valid;
  logic signed [DATA_W-1:0] adc_s0, adc_s1;
  logic [TAPS-1:0]          mon_code;
  logic [HCW-1:0]           mon_cnt_ant, mon_cnt_post;

  tdc_decoder #(.TAPS(TAPS)) u_tdc (
    .clk, .rst_n,
    .taps        (tdl_taps),
    .cal_we, .cal_half, .cal_addr, .cal_data,
    .out_valid   (adc_valid),
    .out_s0      (adc_s0),
    .out_s1      (adc_s1),
    .mon_code, .mon_cnt_ant, .mon_cnt_post
  );

  // ---------------- input buffer ----------------
  logic [1:0]               fb_valid;
  logic signed [DATA_W-1:0] fb_data [2];
  logic                     buf_overrun;

  input_buffer #(.N(1 << LOG2N)) u_buf (
    .clk, .rst_n,
    .in_valid (adc_valid),
    .in_s0    (adc_s0),
    .in_s1    (adc_s1),
    .out_valid(fb_valid),
    .out_sof  (),      // the FFT counts frame positions itself
    .out_data (fb_data),
    .overrun  (buf_overrun)
  );

  // ---------------- two FFT + power-spectrum paths ----------------
  logic [1:0]     ps_valid;
  logic [BW-1:0]  ps_bin [2];
  logic [PWR_W-1:0] ps_pwr [2];

  for (genvar p = 0; p < 2; p++) begin : g_path
    logic                     f_valid;
    logic signed [DATA_W-1:0] f_re, f_im;
    logic [LOG2N-1:0]         f_idx;

    fft_r2dit #(.LOG2N(LOG2N)) u_fft (
      .clk, .rst_n,
      .in_valid (fb_valid[p]),
      .in_re    (fb_data[p]),
      .in_im    ('0),
      .out_valid(f_valid),
      .out_re   (f_re),
      .out_im   (f_im),
      .out_idx  (f_idx)
    );

    power_spectrum #(.LOG2N(LOG2N)) u_pwr (
      .clk, .rst_n,
      .in_valid (f_valid),
      .in_re    (f_re),
      .in_im    (f_im),
      .in_idx   (f_idx),
      .out_valid(ps_valid[p]),
      .out_bin  (ps_bin[p]),
      .out_pwr  (ps_pwr[p])
    );
  end

  // ---------------- accumulation ----------------
  logic              acc_clear, acc_sat, acc_bank_valid;
  logic [CW-1:0]     n_acc, acc_spec_cnt;
  logic [15:0]       acc_seq;
  logic [BW-1:0]     acc_rd_addr;
  logic [ACC_W-1:0]  acc_rd_data;

  spec_accumulator #(.NCH(NCH), .NACC(NACC)) u_acc (
    .clk, .rst_n,
    .in_valid     (ps_valid),
    .in_bin       (ps_bin),
    .in_pwr       (ps_pwr),
    .clear        (acc_clear),
    .n_acc        (n_acc),
    .done         (integ_done),
    .seq          (acc_seq),
    .spec_cnt     (acc_spec_cnt),
    .sat          (acc_sat),
    .rd_addr      (acc_rd_addr),
    .rd_data      (acc_rd_data),
    .rd_valid_bank(acc_bank_valid)
  );

  // ---------------- AXI registers ----------------
  adrs_axi_regs #(.ADDR_W(ADDR_W), .NACC(NACC), .TAPS(TAPS), .NCH(NCH)) u_regs (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .idelay_tap,
    .cal_we, .cal_half, .cal_addr, .cal_data,
    .mon_code, .mon_cnt_ant, .mon_cnt_post,
    .buf_overrun,
    .acc_clear, .n_acc, .acc_seq, .acc_spec_cnt, .acc_sat, .acc_bank_valid,
    .acc_rd_addr, .acc_rd_data
  );

endmodule
