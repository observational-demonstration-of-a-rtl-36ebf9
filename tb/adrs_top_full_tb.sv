// adrs_top_full_tb: one complete integration of the spectrometer at full
// size: every parameter and every register at its reset value, so the
// integration covers 65,536 spectra of 1024 samples (111.8 ms of signal at
// 600 MSa/s, 33.5 million clocks).
//
// The front-end model has an aligned phase and an ideal triangular reference,
// so the reset-value straight-line tables apply.  A 30 mV tone on bin 200 is
// integrated.  Checked: the first integration ends between 65,536 * 512 clocks
// and that plus the pipeline fill after the first samples; the peak is on bin
// 200 at the expected power (within 20 %), its image on bin 312 and the floor
// are far below it; nothing saturated or overran.
`timescale 1ns/1ps
module adrs_top_full_tb;
  import adrs_pkg::*;

  localparam real FS = 600.0e6;
  localparam longint INTEG_CLKS = longint'(N_ACC) * longint'(FFT_N) / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [199:0] tdl_taps;
  logic [4:0] idelay_tap;
  logic integ_done;
  real dc_mv = 0.0, tone_mv = 30.0, tone_hz = 200.0 * FS / 1024.0;

  axil_bfm_if bus (.clk);

  atc_tdl_model #(.BEND(0.0)) u_fe (
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

  always #1.667 clk = ~clk;

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (int'(INTEG_CLKS) + 200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    longint spec [512];
    longint t_done, floor_max;
    logic [31:0] lo, hi, st;
    int lat;
    real expect_pwr;

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    @(posedge integ_done);
    t_done = cyc;
    $display("integration ended at clock %0d (%0d spectra of 512 clocks = %0d)",
             t_done, N_ACC, INTEG_CLKS);
    check(t_done >= INTEG_CLKS && t_done <= INTEG_CLKS + 3000, "integration length");

    for (int b = 0; b < 512; b++) begin
      bus.read(16'h1000 + 16'(8 * b), lo, lat);
      bus.read(16'h1004 + 16'(8 * b), hi, lat);
      spec[b] = longint'({hi, lo});
    end
    // a tone of amplitude A (in 1/256 mV) gives |X| = A*256*N/2 per spectrum
    expect_pwr = (30.0 * 256.0 * 512.0) ** 2 * real'(N_ACC);
    floor_max = 0;
    for (int b = 1; b < 512; b++)
      if (b < 195 || b > 205) if (spec[b] > floor_max) floor_max = spec[b];
    $display("bin 200: %0d (expected about %e), largest bin away from it: %0d",
             spec[200], expect_pwr, floor_max);
    check(real'(spec[200]) > 0.8 * expect_pwr && real'(spec[200]) < 1.2 * expect_pwr,
          "tone power");
    check(spec[312] < spec[200] / 1000, "image of the tone suppressed");
    check(floor_max < spec[200] / 1000, "floor far below the tone");
    bus.read(16'h0010, st, lat);
    check(st[15:0] == 16'd1 && st[18] && !st[16] && !st[19], "status after one integration");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
