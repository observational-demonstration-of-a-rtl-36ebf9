// adrs_linearity_workload_tb: linearity of the detected power against the
// input power, with a noise input, through the complete logic.
//
// The instrument's power linearity was measured with a noise source over a
// 13 dB range of input power, with an error below 10 %. This test drives an
// ideal front-end model (aligned phase, straight triangular reference, so the
// reset-value tables apply) with Gaussian noise. The noise takes a new value
// every clock, so both samples of a clock see the same value. Six rms levels
// are used, from 3 mV to 13.4 mV (13 dB). The largest level stays below the
// +-50 mV reference range for all but about 2e-4 of the samples.
//
// At each level one short integration (NACC = 8 spectra) is read back over
// the bus, and the power of channels 1..511 is summed. By Parseval's theorem
// the sum should be about N^2 * (256 * sigma)^2 / 2 per spectrum; the
// integer-step quantisation of the ADC adds about 1/12 mV^2 to sigma^2.
// Checked at each level: the detected power divided by sigma^2 is within
// 10 % of the mean over all levels (the linearity), and within 15 % of the
// formula.
`timescale 1ns/1ps
module adrs_linearity_workload_tb;
  import adrs_pkg::*;

  localparam int  NACC_W  = 8;
  localparam int  NLEV    = 6;
  localparam real PI      = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [199:0] tdl_taps;
  logic [4:0] idelay_tap;
  logic integ_done;
  real dc_mv = 0.0, tone_mv = 0.0, tone_hz = 0.0;
  real sigma_mv = 0.0;

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

  initial begin : watchdog
    repeat (400000) @(posedge clk);
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

  // Gaussian noise by the Box-Muller method, a new value every clock
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  always @(posedge clk) dc_mv <= sigma_mv * gauss();

  // restart, skip the first result (it may hold spectra of the previous
  // input), return the power of channels 1..511 of the second one
  task automatic integrate(output real pwr);
    logic [31:0] st, lo, hi;
    int lat, seq0;
    bus.write(16'h0004, 32'h1);
    bus.read(16'h0010, st, lat);
    seq0 = int'(st[15:0]);
    do bus.read(16'h0010, st, lat); while (int'(st[15:0]) < seq0 + 2);
    pwr = 0.0;
    for (int b = 1; b < 512; b++) begin
      bus.read(16'h1000 + 16'(8 * b), lo, lat);
      bus.read(16'h1004 + 16'(8 * b), hi, lat);
      pwr += real'(longint'({hi, lo}));
    end
  endtask

  initial begin
    real lev [NLEV];
    real norm [NLEV];
    real mean, model;
    logic [31:0] d;
    int lat;

    for (int i = 0; i < NLEV; i++) lev[i] = 3.0 * (10.0 ** (13.0 / 20.0 * real'(i) / real'(NLEV - 1)));

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    bus.write(16'h000C, 32'(NACC_W));

    mean = 0.0;
    for (int i = 0; i < NLEV; i++) begin
      real p;
      sigma_mv = lev[i];
      integrate(p);
      model   = 1024.0 * 1024.0 * 65536.0 * (lev[i] ** 2 + 1.0 / 12.0) / 2.0 * real'(NACC_W);
      norm[i] = p / (lev[i] ** 2);
      mean   += norm[i] / real'(NLEV);
      $display("rms %6.2f mV (+%4.1f dB): detected %e, formula %e, ratio %f",
               lev[i], 20.0 * $log10(lev[i] / lev[0]), p, model, p / model);
      check(p > 0.85 * model && p < 1.15 * model, "detected power against the formula");
    end
    for (int i = 0; i < NLEV; i++)
      check(norm[i] > 0.9 * mean && norm[i] < 1.1 * mean, "linear response within 10 %");

    bus.read(16'h0010, d, lat);
    check(!d[16] && !d[19], "no saturation, no buffer overrun");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
