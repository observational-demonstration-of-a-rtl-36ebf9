// adrs_tone_workload_tb: the sine-tone measurements of the spectrometer,
// run through the complete logic.
//
// The instrument was characterised with sine tones at 63 MHz and 266 MHz.
// This test feeds the same two frequencies, 30 mV in amplitude, through an
// ideal front-end model (aligned phase, straight triangular reference, so the
// reset-value tables apply). Each tone is integrated over a short integration
// (NACC = 8 spectra, set over the bus), and the spectrum is read back.
//
// 63 MHz lies on channel 107.52 (channels are 600 MHz / 1024 = 585.9 kHz
// apart), almost halfway between two channels. 266 MHz lies on channel
// 453.97, almost on a channel. No window is applied before the FFT, so a
// channel's response to a tone offset by x channels is sinc^2(x). The
// checks, against that formula:
//   - the 266 MHz tone peaks on channel 454 at the full on-channel power
//     (A * 256 * N/2)^2 * NACC, within 20 %;
//   - the 63 MHz tone splits between channels 107 and 108, each about 3.9 dB
//     below that power (the main lobe is 0.886 channels wide at half power);
//   - channel 106, 1.52 channels off, is at the first side lobe, about
//     13.4 dB down;
//   - the power summed over channels 100..115 matches the on-channel power
//     (within 20 %), so no power is lost between channels.
// Tolerances are +-1.5 dB on the lobe levels.
`timescale 1ns/1ps
module adrs_tone_workload_tb;
  import adrs_pkg::*;

  localparam real FS     = 600.0e6;
  localparam int  NACC_W = 8;
  localparam real AMP_MV = 30.0;
  localparam real PI     = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [199:0] tdl_taps;
  logic [4:0] idelay_tap;
  logic integ_done;
  real dc_mv = 0.0, tone_mv = 0.0, tone_hz = 0.0;

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
    repeat (200000) @(posedge clk);
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

  // restart, skip the first result (it may hold spectra of the previous
  // input), read the second one
  task automatic integrate(output longint spec [512]);
    logic [31:0] st, lo, hi;
    int lat, seq0;
    bus.write(16'h0004, 32'h1);
    bus.read(16'h0010, st, lat);
    seq0 = int'(st[15:0]);
    do bus.read(16'h0010, st, lat); while (int'(st[15:0]) < seq0 + 2);
    for (int b = 0; b < 512; b++) begin
      bus.read(16'h1000 + 16'(8 * b), lo, lat);
      bus.read(16'h1004 + 16'(8 * b), hi, lat);
      spec[b] = longint'({hi, lo});
    end
  endtask

  function automatic real sinc2(real x);
    return (x == 0.0) ? 1.0 : ($sin(PI * x) / (PI * x)) ** 2;
  endfunction

  function automatic real db(real r);
    return 10.0 * $log10(r);
  endfunction

  // level of channel b relative to the on-channel power, against the formula
  task automatic check_lobe(longint spec [512], int b, real ch, real p0, string what);
    real got, want;
    got  = db(real'(spec[b]) / p0);
    want = db(sinc2(real'(b) - ch));
    $display("%s: channel %0d at %6.2f dB, expected %6.2f dB", what, b, got, want);
    check(got > want - 1.5 && got < want + 1.5, what);
  endtask

  initial begin
    longint s63 [512], s266 [512];
    real p0, ch63, ch266, sum;
    logic [31:0] d;
    int lat;

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    bus.write(16'h000C, 32'(NACC_W));
    p0 = (AMP_MV * 256.0 * 512.0) ** 2 * real'(NACC_W);

    // ---- 266 MHz: almost on a channel ----
    tone_mv = AMP_MV;
    tone_hz = 266.0e6;
    ch266   = tone_hz / (FS / 1024.0);
    integrate(s266);
    check_lobe(s266, 454, ch266, p0, "266 MHz peak");
    begin
      int pk = 1;
      for (int b = 1; b < 512; b++) if (s266[b] > s266[pk]) pk = b;
      check(pk == 454, "266 MHz tone peaks on channel 454");
    end
    check(real'(s266[454]) > 0.8 * p0 && real'(s266[454]) < 1.2 * p0,
          "266 MHz on-channel power");

    // ---- 63 MHz: almost halfway between two channels ----
    tone_hz = 63.0e6;
    ch63    = tone_hz / (FS / 1024.0);
    integrate(s63);
    check_lobe(s63, 107, ch63, p0, "63 MHz main lobe");
    check_lobe(s63, 108, ch63, p0, "63 MHz main lobe");
    check_lobe(s63, 106, ch63, p0, "63 MHz first side lobe");
    check_lobe(s63, 109, ch63, p0, "63 MHz first side lobe");
    sum = 0.0;
    for (int b = 100; b <= 115; b++) sum += real'(s63[b]);
    $display("63 MHz: channels 100..115 hold %f of the on-channel power", sum / p0);
    check(sum > 0.8 * p0 && sum < 1.2 * p0, "63 MHz power summed over its channels");

    bus.read(16'h0010, d, lat);
    check(!d[16] && !d[19], "no saturation, no buffer overrun");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
