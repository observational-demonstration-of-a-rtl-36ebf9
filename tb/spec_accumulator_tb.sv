// spec_accumulator_tb: self-checking test of the spectrum integrator.
//
// Spectra of 512 random power values arrive alternately on the two input
// lanes, with idle clocks between some of them.  Checked: done pulses exactly
// one clock after the last bin of the n_acc-th spectrum; the finished bank
// holds the exact sums (read with one clock of latency) and keeps them while
// the next integration runs in the other bank; seq and spec_cnt count
// correctly; clear in the middle of a spectrum restarts the integration at
// the next bin 0.  A second instance with a 52-bit accumulator checks that a
// sum saturates at all-ones and raises the sat flag.
`timescale 1ns/1ps
module spec_accumulator_tb;
  import adrs_pkg::*;

  localparam int NCH = 512;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [1:0] in_valid = '0;
  logic [8:0] in_bin [2];
  logic [PWR_W-1:0] in_pwr [2];
  logic clear = 1'b0;
  logic [16:0] n_acc = 17'd3;
  logic done, sat, rd_valid_bank;
  logic [15:0] seq;
  logic [16:0] spec_cnt;
  logic [8:0] rd_addr = '0;
  logic [ACC_W-1:0] rd_data;

  // saturation instance
  logic done_s, sat_s, rvb_s;
  logic [15:0] seq_s;
  logic [16:0] cnt_s;
  logic [51:0] rd_data_s;

  int checks = 0, failures = 0;

  spec_accumulator dut (.*);

  spec_accumulator #(.AW(52)) dut_sat (
    .clk, .rst_n, .in_valid, .in_bin, .in_pwr, .clear, .n_acc,
    .done(done_s), .seq(seq_s), .spec_cnt(cnt_s), .sat(sat_s),
    .rd_addr, .rd_data(rd_data_s), .rd_valid_bank(rvb_s)
  );

  always #1.667 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ACC_W-1:0] ref_sum [NCH];
  logic [ACC_W-1:0] done_ref [NCH];
  int lane = 0;
  int dones = 0;

  always @(posedge clk) if (done) dones++;

  // one spectrum; big=1 uses powers near 2^50
  task automatic send_spectrum(bit big, bit first_of_integ, output bit done_seen);
    done_seen = 0;
    if ($urandom_range(1, 0)) repeat ($urandom_range(5, 1)) @(negedge clk) in_valid = '0;
    for (int b = 0; b < NCH; b++) begin
      logic [PWR_W-1:0] p;
      p = big ? {2'b11, 48'($urandom)} : PWR_W'($urandom_range(1000000, 0));
      @(negedge clk);
      in_valid = '0;
      in_valid[lane] = 1'b1;
      in_bin[lane] = 9'(b);
      in_pwr[lane] = p;
      ref_sum[b] = (first_of_integ ? '0 : ref_sum[b]) + ACC_W'(p);
    end
    @(negedge clk) in_valid = '0;
    lane ^= 1;
    // done is registered on the edge after the last bin
    #0.1;
    done_seen = done;
  endtask

  task automatic check_bank(string what);
    int bad = 0;
    for (int b = 0; b < NCH; b++) begin
      @(negedge clk) rd_addr = 9'(b);
      @(posedge clk);
      #0.1;
      if (rd_data != done_ref[b]) begin
        bad++;
        if (bad < 4) $display("FAIL %s bin %0d: %0d exp %0d", what, b, rd_data, done_ref[b]);
      end
    end
    checks++;
    if (bad != 0) failures++;
  endtask

  initial begin
    bit d;
    for (int p = 0; p < 2; p++) begin in_bin[p] = '0; in_pwr[p] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);

    // ---- integration 1: three spectra ----
    for (int s = 0; s < 3; s++) begin
      send_spectrum(0, s == 0, d);
      checks++;
      if (d != (s == 2)) begin
        failures++;
        $display("FAIL done=%0b after spectrum %0d", d, s);
      end
      if (s < 2) begin
        checks++;
        if (spec_cnt != 17'(s + 1)) begin
          failures++;
          $display("FAIL spec_cnt %0d", spec_cnt);
        end
      end
    end
    done_ref = ref_sum;
    checks++;
    if (seq != 16'd1 || !rd_valid_bank || spec_cnt != 0) begin
      failures++;
      $display("FAIL seq %0d bank_valid %0b", seq, rd_valid_bank);
    end
    check_bank("integration 1");

    // ---- integration 2 runs; the result of integration 1 must stay ----
    send_spectrum(0, 1, d);
    check_bank("integration 1 during integration 2");
    send_spectrum(0, 0, d);
    send_spectrum(0, 0, d);
    done_ref = ref_sum;
    checks++;
    if (!d || seq != 16'd2) begin
      failures++;
      $display("FAIL second integration done=%0b seq=%0d", d, seq);
    end
    check_bank("integration 2");

    // ---- clear in the middle of a spectrum ----
    for (int b = 0; b < 100; b++) begin
      @(negedge clk);
      in_valid = 2'b01; in_bin[0] = 9'(b); in_pwr[0] = 50'(12345);
    end
    @(negedge clk) begin in_valid = '0; clear = 1'b1; end
    @(negedge clk) clear = 1'b0;
    // the rest of the interrupted spectrum must be ignored
    for (int b = 100; b < NCH; b++) begin
      @(negedge clk);
      in_valid = 2'b01; in_bin[0] = 9'(b); in_pwr[0] = 50'(777);
    end
    @(negedge clk) in_valid = '0;
    checks++;
    if (spec_cnt != 0) begin
      failures++;
      $display("FAIL partial spectrum counted after clear: %0d", spec_cnt);
    end
    lane = 1;
    for (int s = 0; s < 3; s++) send_spectrum(0, s == 0, d);
    done_ref = ref_sum;
    check_bank("integration after clear");

    // ---- saturation: six spectra near 2^50 overflow 52 bits ----
    n_acc = 17'd6;
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    checks++;
    if (sat_s) begin failures++; $display("FAIL sat before overflow"); end
    for (int s = 0; s < 6; s++) send_spectrum(1, s == 0, d);
    checks++;
    if (!sat_s || sat) begin
      failures++;
      $display("FAIL sat flags: narrow %0b wide %0b", sat_s, sat);
    end
    begin
      int nsat = 0;
      for (int b = 0; b < NCH; b++) begin
        @(negedge clk) rd_addr = 9'(b);
        @(posedge clk);
        #0.1;
        if (ref_sum[b] >= (64'(1) << 52)) begin
          checks++;
          nsat++;
          if (rd_data_s != '1) begin
            failures++;
            $display("FAIL bin %0d not saturated: %0h", b, rd_data_s);
          end
        end
      end
      checks++;
      if (nsat == 0) begin failures++; $display("FAIL no bin overflowed"); end
    end
    checks++;
    if (dones != 4) begin failures++; $display("FAIL %0d done pulses", dones); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
