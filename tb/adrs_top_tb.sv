// adrs_top_tb: end-to-end test of the spectrometer logic with every parameter
// at its default.
//
// An analog front-end model (atc_tdl_model) with an uncalibrated path offset
// and a bent reference drives the delay-line taps; a bus model plays the CPU.
// The test runs the spectrometer as an observer would:
//   1. phase calibration: sweep the 32 input-delay levels with a 0 V input,
//      take a TDC snapshot at each, keep the level whose two edges sit
//      closest to the middle of their halves (counts 50 and 50);
//   2. amplitude calibration: sweep a dc input over the reference range,
//      record the count of each half per voltage and load the two
//      101-entry tables with the mean voltage of each count;
//   3. check that the calibrated decoder is closer to a dc input than the
//      default straight-line table;
//   4. integrate a tone on bin 100, then on bin 300 (a short integration set
//      through the NACC register), read each spectrum over the bus and check
//      the peak bin and its height above the median; check that the result of
//      one integration stays readable while the next runs, and that
//      integrations end exactly every n_acc * 512 clocks.
// Mechanisms counted (each must occur): delay-level changes that moved the
// edges, table writes, spectra from FFT 1 and from FFT 2, result-bank swaps,
// integration restarts.
`timescale 1ns/1ps
module adrs_top_tb;
  import adrs_pkg::*;

  localparam real PHASE_OFF = 700.0;       // ps, path difference to undo
  localparam real FS        = 600.0e6;
  localparam int  NACC_RUN  = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [199:0] tdl_taps;
  logic [4:0] idelay_tap;
  logic integ_done;
  real dc_mv = 0.0, tone_mv = 0.0, tone_hz = 0.0;

  axil_bfm_if bus (.clk);

  atc_tdl_model #(.PHASE_OFF_PS(PHASE_OFF)) u_fe (
    .clk, .idelay_tap, .dc_mv, .tone_mv, .tone_hz, .taps(tdl_taps)
  );

  adrs_top dut (
    .clk, .rst_n, .tdl_taps, .idelay_tap,
    .s_awaddr(bus.awaddr), .s_awvalid(bus.awvalid), .s_awready(bus.awready),
    .s_wdata(bus.wdata), .s_wvalid(bus.wvalid), .s_wready(bus.wready),
    .s_bresp(bus.bresp), .s_bvalid(bus.bvalid), .s_bready(bus.bready),
    .s_araddr(bus.araddr), .s_arvalid(bus.arvalid), .s_arready(bus.arready),
    .s_rdata(bus.rdata), .s_rresp(bus.rresp), .s_rvalid(bus.rvalid), .s_rready(bus.rready),
    .integ_done
  );

  always #1.667 clk = ~clk;   // 300 MHz, 200 taps of 16.67 ps

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_spec_fft[2] = '{0, 0};
  int n_done = 0, n_cal_we = 0, n_restart = 0, n_phase_moves = 0;
  longint cyc = 0, last_done = -1, done_gap = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < 2; p++)
      if (dut.ps_valid[p] && dut.ps_bin[p] == 9'd511) n_spec_fft[p]++;
    if (dut.cal_we) n_cal_we++;
    if (dut.acc_clear) n_restart++;
    if (integ_done) begin
      n_done++;
      if (last_done >= 0) done_gap = cyc - last_done;
      last_done = cyc;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic snapshot(output int ant, output int post);
    logic [31:0] d;
    int lat;
    repeat (8) @(posedge clk);           // let the new input reach the counters
    bus.write(16'h0004, 32'h2);
    bus.read(16'h0020, d, lat);
    ant  = int'(d[6:0]);
    post = int'(d[22:16]);
  endtask

  // integrate with the current input, return the spectrum
  task automatic integrate(output longint spec [512]);
    logic [31:0] st, lo, hi;
    int lat, seq0;
    bus.read(16'h0010, st, lat);
    seq0 = int'(st[15:0]);
    // the first result after a restart may contain spectra of the previous
    // input still in the pipeline: wait for the second one
    do bus.read(16'h0010, st, lat); while (int'(st[15:0]) < seq0 + 2);
    for (int b = 0; b < 512; b++) begin
      bus.read(16'h1000 + 16'(8 * b), lo, lat);
      bus.read(16'h1004 + 16'(8 * b), hi, lat);
      spec[b] = longint'({hi, lo});
    end
  endtask

  function automatic longint median(longint s [512]);
    longint q [$];
    foreach (s[i]) q.push_back(s[i]);
    q.sort();
    return q[256];
  endfunction

  function automatic int peak_bin(longint s [512]);
    int pk = 1;
    for (int b = 1; b < 512; b++) if (s[b] > s[pk]) pk = b;
    return pk;
  endfunction

  initial begin
    int best_lvl, best_err, a, p, lvl_a, lvl_p;
    real sum_v [2][101];
    int  n_v [2][101];
    int  tab [2][101];
    longint spec1 [512], spec2 [512], spec_mid [512];
    logic [31:0] d;
    int lat;

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);

    bus.read(16'h0000, d, lat);
    check(d == 32'h4144_5253, "ID register");

    // ---------------- 1. phase calibration ----------------
    dc_mv = 0.0;
    best_err = 1000;
    best_lvl = 0;
    lvl_a = -1; lvl_p = -1;
    for (int lvl = 0; lvl < 32; lvl++) begin
      int err;
      bus.write(16'h0008, 32'(lvl));
      snapshot(a, p);
      if (lvl > 0 && (a != lvl_a || p != lvl_p)) n_phase_moves++;
      lvl_a = a; lvl_p = p;
      err = ((a > 50) ? a - 50 : 50 - a) + ((p > 50) ? p - 50 : 50 - p);
      if (err < best_err) begin best_err = err; best_lvl = lvl; end
    end
    bus.write(16'h0008, 32'(best_lvl));
    snapshot(a, p);
    $display("phase calibration: level %0d, counts %0d / %0d", best_lvl, a, p);
    check(best_lvl >= 13 && best_lvl <= 15, "phase calibration level");
    check(a >= 47 && a <= 53 && p >= 47 && p <= 53, "edges centred after phase calibration");

    // ---------------- 2. amplitude calibration ----------------
    for (int h = 0; h < 2; h++)
      for (int c = 0; c <= 100; c++) begin sum_v[h][c] = 0.0; n_v[h][c] = 0; end
    for (int k = -220; k <= 220; k++) begin
      dc_mv = real'(k) * 0.25;
      snapshot(a, p);
      sum_v[0][a] += dc_mv; n_v[0][a]++;
      sum_v[1][p] += dc_mv; n_v[1][p]++;
    end
    for (int h = 0; h < 2; h++) begin
      int last = -1;
      for (int c = 0; c <= 100; c++)
        if (n_v[h][c] > 0) tab[h][c] = $rtoi(sum_v[h][c] / n_v[h][c] * 256.0);
      // counts never seen take the nearest seen value
      for (int c = 0; c <= 100; c++) begin
        if (n_v[h][c] > 0) last = tab[h][c];
        else if (last >= 0 || c > 0) tab[h][c] = last;
        else tab[h][c] = -55 * 256;
      end
      bus.write(16'h0018, {23'h0, h[0], 8'h0});
      for (int c = 0; c <= 100; c++) bus.write(16'h001C, 32'(tab[h][c]));
    end
    check(n_cal_we == 202, "calibration table writes");

    // ---------------- 3. decoder accuracy with the table ----------------
    begin
      real e_cal, e_lin, v;
      e_cal = 0.0; e_lin = 0.0;
      for (int k = -40; k <= 40; k += 4) begin
        dc_mv = real'(k) + 0.3;
        snapshot(a, p);
        repeat (4) @(posedge clk);
        v = real'(dut.adc_s1) / 256.0 - dc_mv;  e_cal += v * v;
        v = real'(dut.adc_s0) / 256.0 - dc_mv;  e_cal += v * v;
        v = real'(a - 50) - dc_mv;              e_lin += v * v;
        v = real'(p - 50) - dc_mv;              e_lin += v * v;
      end
      $display("rms error: calibrated %f mV, straight line %f mV",
               $sqrt(e_cal / 42.0), $sqrt(e_lin / 42.0));
      check($sqrt(e_cal / 42.0) < 1.0, "calibrated decoder within 1 mV rms");
      check(e_cal < e_lin / 4.0, "calibration improves on the straight line");
    end

    // ---------------- 4. spectra ----------------
    dc_mv = 0.0;
    tone_mv = 30.0;
    tone_hz = 100.0 * FS / 1024.0;
    bus.write(16'h000C, 32'(NACC_RUN));
    bus.write(16'h0004, 32'h1);
    integrate(spec1);
    $display("tone 1: peak bin %0d, peak/median %0d", peak_bin(spec1),
             spec1[peak_bin(spec1)] / (median(spec1) + 1));
    check(peak_bin(spec1) == 100, "tone on bin 100");
    check(spec1[100] > 1000 * median(spec1), "tone 1 well above the floor");
    check(spec1[412] < spec1[100] / 1000, "no image of tone 1 on bin 412");

    // new tone; the old result must stay readable during the next integration
    tone_hz = 300.0 * FS / 1024.0;
    tone_mv = 20.0;
    bus.write(16'h0004, 32'h1);
    repeat (NACC_RUN * 512 / 2) @(posedge clk);
    for (int b = 98; b <= 102; b++) begin
      logic [31:0] lo, hi;
      bus.read(16'h1000 + 16'(8 * b), lo, lat);
      bus.read(16'h1004 + 16'(8 * b), hi, lat);
      spec_mid[b] = longint'({hi, lo});
      check(spec_mid[b] == spec1[b], "result stays while the next integration runs");
    end
    integrate(spec2);
    $display("tone 2: peak bin %0d, peak/median %0d", peak_bin(spec2),
             spec2[peak_bin(spec2)] / (median(spec2) + 1));
    check(peak_bin(spec2) == 300, "tone on bin 300");
    check(spec2[300] > 1000 * median(spec2), "tone 2 well above the floor");
    check(done_gap == longint'(NACC_RUN * 512), "integration period n_acc * 512 clocks");

    bus.read(16'h0010, d, lat);
    check(!d[16] && !d[19], "no saturation, no buffer overrun");

    // ---------------- mechanisms ----------------
    $display("mechanisms: delay moves %0d, table writes %0d, spectra FFT1 %0d FFT2 %0d, bank swaps %0d, restarts %0d",
             n_phase_moves, n_cal_we, n_spec_fft[0], n_spec_fft[1], n_done, n_restart);
    check(n_phase_moves > 0, "input delay moved the edges");
    check(n_spec_fft[0] > 0 && n_spec_fft[1] > 0, "both FFT paths produced spectra");
    check(n_done >= 4, "result banks swapped");
    check(n_restart >= 2, "integration restarted");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
