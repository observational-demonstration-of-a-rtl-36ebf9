// adrs_axi_regs_tb: self-checking test of the AXI4-Lite register block.
//
// A bus model writes and reads every register and checks: the ID word, the
// input-delay level and the spectra-per-integration count (reset 65536), the
// one-clock restart and snapshot pulses, the calibration-table write with its
// auto-incremented address, the TDC snapshot (counts and the seven words of
// the 200-bit code), the status word, and the spectrum window, served from a
// model block RAM with one clock of read latency.  Every read must return
// RVALID three clocks after its address handshake.
`timescale 1ns/1ps
module adrs_axi_regs_tb;
  import adrs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  axil_bfm_if bus (.clk);

  logic [4:0]  idelay_tap;
  logic        cal_we, cal_half;
  logic [6:0]  cal_addr;
  logic signed [DATA_W-1:0] cal_data;
  logic [199:0] mon_code;
  logic [6:0]  mon_cnt_ant, mon_cnt_post;
  logic        buf_overrun = 1'b0;
  logic        acc_clear;
  logic [16:0] n_acc;
  logic [15:0] acc_seq = 16'd7;
  logic [16:0] acc_spec_cnt = 17'd1234;
  logic        acc_sat = 1'b1, acc_bank_valid = 1'b1;
  logic [8:0]  acc_rd_addr;
  logic [63:0] acc_rd_data;

  int checks = 0, failures = 0;

  adrs_axi_regs dut (
    .clk, .rst_n,
    .s_awaddr(bus.awaddr), .s_awvalid(bus.awvalid), .s_awready(bus.awready),
    .s_wdata(bus.wdata), .s_wvalid(bus.wvalid), .s_wready(bus.wready),
    .s_bresp(bus.bresp), .s_bvalid(bus.bvalid), .s_bready(bus.bready),
    .s_araddr(bus.araddr), .s_arvalid(bus.arvalid), .s_arready(bus.arready),
    .s_rdata(bus.rdata), .s_rresp(bus.rresp), .s_rvalid(bus.rvalid), .s_rready(bus.rready),
    .idelay_tap, .cal_we, .cal_half, .cal_addr, .cal_data,
    .mon_code, .mon_cnt_ant, .mon_cnt_post, .buf_overrun,
    .acc_clear, .n_acc, .acc_seq, .acc_spec_cnt, .acc_sat, .acc_bank_valid,
    .acc_rd_addr, .acc_rd_data
  );

  always #1.667 clk = ~clk;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model of the accumulator result bank: one clock read latency
  function automatic logic [63:0] bank_word(logic [8:0] b);
    return {7'h55, b, 16'hbeef, 7'h2a, b, 16'(b * 3)};
  endfunction
  always @(posedge clk) acc_rd_data <= bank_word(acc_rd_addr);

  // pulse and table-write monitors
  int clear_pulses = 0, cal_writes = 0;
  logic [6:0] cal_addr_seen [$];
  logic [24:0] cal_data_seen [$];
  logic cal_half_seen [$];
  always @(posedge clk) begin
    if (acc_clear) clear_pulses++;
    if (cal_we) begin
      cal_writes++;
      cal_addr_seen.push_back(cal_addr);
      cal_data_seen.push_back(cal_data);
      cal_half_seen.push_back(cal_half);
    end
  end

  task automatic expect_read(logic [15:0] a, logic [31:0] e, string what);
    logic [31:0] d;
    int lat;
    bus.read(a, d, lat);
    checks++;
    if (d !== e || lat != 3) begin
      failures++;
      $display("FAIL %s @%h: %h exp %h (latency %0d)", what, a, d, e, lat);
    end
  endtask

  initial begin
    logic [199:0] code;
    code = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    mon_code = code;
    mon_cnt_ant = 7'd42;
    mon_cnt_post = 7'd77;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    expect_read(16'h0000, 32'h4144_5253, "ID");
    expect_read(16'h000C, 32'd65536, "NACC reset");
    checks++;
    if (n_acc != 17'd65536) begin failures++; $display("FAIL n_acc port"); end

    bus.write(16'h0008, 32'd19);
    checks++;
    if (idelay_tap != 5'd19) begin failures++; $display("FAIL idelay_tap %0d", idelay_tap); end
    expect_read(16'h0008, 32'd19, "IDELAY");
    bus.write(16'h000C, 32'd100);
    expect_read(16'h000C, 32'd100, "NACC");

    // restart pulse
    bus.write(16'h0004, 32'h1);
    repeat (3) @(posedge clk);
    checks++;
    if (clear_pulses != 1) begin failures++; $display("FAIL %0d clear pulses", clear_pulses); end

    // snapshot
    bus.write(16'h0004, 32'h2);
    mon_code = '0; mon_cnt_ant = '0; mon_cnt_post = '0;   // must not matter any more
    expect_read(16'h0020, {9'h0, 7'd77, 9'h0, 7'd42}, "SNAPCNT");
    for (int w = 0; w < 7; w++) begin
      logic [223:0] ext;
      ext = {24'h0, code};
      expect_read(16'h0040 + 16'(4 * w), ext[32 * w +: 32], "SNAPCODE");
    end
    expect_read(16'h0010, {12'h0, 1'b0, 1'b1, 1'b1, 1'b1, 16'd7}, "STATUS");
    expect_read(16'h0014, 32'd1234, "SPECCNT");

    // calibration table: posterior half, start at 5, three words
    bus.write(16'h0018, 32'h105);
    expect_read(16'h0018, 32'h105, "CALADDR");
    bus.write(16'h001C, 32'h1ff_fff0);
    bus.write(16'h001C, 32'h000_0011);
    bus.write(16'h001C, 32'h012_3456);
    repeat (2) @(posedge clk);
    checks++;
    if (cal_writes != 3 || cal_addr_seen[0] != 7'd5 || cal_addr_seen[1] != 7'd6 ||
        cal_addr_seen[2] != 7'd7 || cal_data_seen[0] != 25'h1ff_fff0 ||
        cal_data_seen[2] != 25'h012_3456 || !cal_half_seen[0] || !cal_half_seen[2]) begin
      failures++;
      $display("FAIL calibration writes: %0d", cal_writes);
    end
    expect_read(16'h0018, 32'h108, "CALADDR after writes");

    // spectrum window
    for (int t = 0; t < 40; t++) begin
      logic [8:0] b;
      logic [63:0] w;
      b = (t < 2) ? 9'(t * 511) : 9'($urandom_range(511, 0));
      w = bank_word(b);
      expect_read(16'h1000 + 16'(8 * b), w[31:0], "SPEC low");
      expect_read(16'h1004 + 16'(8 * b), w[63:32], "SPEC high");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
