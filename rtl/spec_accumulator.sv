// spec_accumulator: integrates power spectra and holds the last integration
// for the CPU.
//
// What it does: the power streams of the two FFT paths (512 bins each, bins in
// order 0..511) are merged; a spectrum never interleaves with one of the other
// path because the input buffer starts the two FFTs half a frame-time apart.
// Each bin is added to a 64-bit accumulator word; after n_acc spectra (65,536
// in the published prototype, 111.8 ms at 600 MSa/s with 1024-sample frames)
// the integration is complete.  Two banks are used in turn: while one
// integrates, the other holds the previous result for reading over the bus.
// The first spectrum of an integration is written, not added, so no clearing
// pass is needed.  The accumulation count and the result in block RAM
// readable by the CPU follow the paper; the bank swap, the 64-bit width and
// the saturating add are this design's own choices.
//
// Interface: clear restarts the integration (it starts at the next bin 0).
// done pulses for one clock when an integration completes; seq counts
// completed integrations, spec_cnt the spectra in the current one; sat is a
// sticky flag set when a sum saturated.  rd_addr/rd_data read the completed
// bank with one clock of latency; rd_valid_bank tells that one exists.
//
// Timing: read-modify-write in two clocks (read at t, write at t+1).  Bins of
// consecutive inputs always differ, so no forwarding is needed.
module spec_accumulator
  import adrs_pkg::*;
#(
  parameter int unsigned NCH  = N_CHAN,
  parameter int unsigned PW   = PWR_W,
  parameter int unsigned AW   = ACC_W,
  parameter int unsigned NACC = N_ACC,
  localparam int unsigned BW  = $clog2(NCH),
  localparam int unsigned CW  = $clog2(NACC + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  // two power streams
  input  logic [1:0]      in_valid,
  input  logic [BW-1:0]   in_bin [2],
  input  logic [PW-1:0]   in_pwr [2],
  // control / status
  input  logic            clear,
  input  logic [CW-1:0]   n_acc,
  output logic            done,
  output logic [15:0]     seq,
  output logic [CW-1:0]   spec_cnt,
  output logic            sat,
  // readout of the completed bank
  input  logic [BW-1:0]   rd_addr,
  output logic [AW-1:0]   rd_data,
  output logic            rd_valid_bank
);

  // ---------------- merge ----------------
  logic          m_v;
  logic [BW-1:0] m_bin;
  logic [PW-1:0] m_pwr;
  always_comb begin
    m_v   = |in_valid;
    m_bin = in_valid[1] ? in_bin[1] : in_bin[0];
    m_pwr = in_valid[1] ? in_pwr[1] : in_pwr[0];
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(&in_valid))
    else $error("spec_accumulator: both power streams valid in one clock");

  // ---------------- integration control ----------------
  logic wbank;      // bank being integrated
  logic synced;     // integration aligned to a spectrum start
  logic first;      // current spectrum is the first of the integration
  logic accept;
  assign accept = m_v && (synced || m_bin == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank         <= 1'b0;
      synced        <= 1'b0;
      first         <= 1'b1;
      spec_cnt      <= '0;
      seq           <= '0;
      done          <= 1'b0;
      rd_valid_bank <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        synced   <= 1'b0;
        first    <= 1'b1;
        spec_cnt <= '0;
      end else if (accept) begin
        synced <= 1'b1;
        if (m_bin == BW'(NCH - 1)) begin
          // a spectrum is complete
          if (spec_cnt + 1'b1 >= n_acc) begin
            spec_cnt      <= '0;
            first         <= 1'b1;
            wbank         <= ~wbank;
            done          <= 1'b1;
            seq           <= seq + 1'b1;
            rd_valid_bank <= 1'b1;
          end else begin
            spec_cnt <= spec_cnt + 1'b1;
            first    <= 1'b0;
          end
        end
      end
    end
  end

  // ---------------- read-modify-write pipeline ----------------
  logic          s1_v, s1_first, s1_bank;
  logic [BW-1:0] s1_bin;
  logic [PW-1:0] s1_pwr;
  logic [AW-1:0] bank_q [2];   // synchronous read data of each bank

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
    end else begin
      s1_v <= accept && !clear;
    end
  end

  always_ff @(posedge clk) begin
    s1_first <= first;
    s1_bank  <= wbank;
    s1_bin   <= m_bin;
    s1_pwr   <= m_pwr;
  end

  logic [AW:0]   sum_full;
  logic [AW-1:0] sum;
  always_comb begin
    logic [AW-1:0] old;
    old      = s1_first ? '0 : bank_q[s1_bank];
    sum_full = {1'b0, old} + (AW + 1)'(s1_pwr);
    sum      = sum_full[AW] ? '1 : sum_full[AW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                    sat <= 1'b0;
    else if (clear)                                sat <= 1'b0;
    else if (s1_v && sum_full[AW])                 sat <= 1'b1;
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic [AW-1:0] mem [NCH];
    logic [BW-1:0] raddr;
    // the integrating bank is read by the pipeline, the other one by the CPU
    assign raddr = (wbank == 1'(b)) ? m_bin : rd_addr;
    always_ff @(posedge clk) begin
      if (s1_v && s1_bank == 1'(b)) mem[s1_bin] <= sum;
      bank_q[b] <= mem[raddr];
    end
  end

  logic rd_bank_q;
  always_ff @(posedge clk) rd_bank_q <= ~wbank;
  assign rd_data = bank_q[rd_bank_q];

endmodule
