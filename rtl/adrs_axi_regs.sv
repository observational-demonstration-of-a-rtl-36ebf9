// adrs_axi_regs: AXI4-Lite slave through which the CPU controls the ADC and
// downloads the integrated spectrum.
//
// The published prototype reaches the programmable logic from Python over AXI
// ports: the ADC calibrations (input-delay setting, amplitude table) are
// controlled and the integrated spectrum is read from block RAM this way.
// The register map below is this design's own:
//
//   0x0000  ID        RO  0x41445253 ("ADRS")
//   0x0004  CTRL      WO  bit0: restart integration, bit1: take TDC snapshot
//   0x0008  IDELAY    RW  [4:0] delay level of the T_in input delay (32 levels)
//   0x000C  NACC      RW  spectra per integration (reset value 65536)
//   0x0010  STATUS    RO  [15:0] completed integrations, [16] saturation,
//                         [17] snapshot taken, [18] a result bank exists,
//                         [19] input-buffer overrun
//   0x0014  SPECCNT   RO  spectra in the running integration
//   0x0018  CALADDR   RW  [6:0] table address, [8] table (0 anterior, 1 posterior)
//   0x001C  CALDATA   WO  writes [24:0] into the table, then CALADDR[6:0]++
//   0x0020  SNAPCNT   RO  [6:0] anterior count, [22:16] posterior count
//   0x0040+4w SNAPCODE RO word w = 0..6 of the 200-bit raw delay-line code
//   0x1000 + 8b + 4h  SPEC RO  bin b (0..511) of the last integration,
//                         h = 0 low / 1 high 32 bits of the 64-bit sum
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// response is pending (WSTRB is ignored); the response is OKAY.  A read takes
// three clocks from the address handshake to RVALID, so the block RAM of the
// accumulator can answer.  Single clock domain with the signal path (clock
// crossing to the CPU's bus clock is not part of this block).
module adrs_axi_regs
  import adrs_pkg::*;
#(
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned NACC   = N_ACC,
  parameter int unsigned TAPS   = TDL_TAPS,
  parameter int unsigned NCH    = N_CHAN,
  parameter int unsigned DW     = DATA_W,
  parameter int unsigned AW     = ACC_W,
  localparam int unsigned CW    = $clog2(NACC + 1),
  localparam int unsigned HCW   = $clog2(TAPS / 2 + 1),
  localparam int unsigned BW    = $clog2(NCH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0]    s_awaddr,
  input  logic                 s_awvalid,
  output logic                 s_awready,
  input  logic [31:0]          s_wdata,
  input  logic                 s_wvalid,
  output logic                 s_wready,
  output logic [1:0]           s_bresp,
  output logic                 s_bvalid,
  input  logic                 s_bready,
  input  logic [ADDR_W-1:0]    s_araddr,
  input  logic                 s_arvalid,
  output logic                 s_arready,
  output logic [31:0]          s_rdata,
  output logic [1:0]           s_rresp,
  output logic                 s_rvalid,
  input  logic                 s_rready,
  // ADC control
  output logic [IDELAY_W-1:0]  idelay_tap,
  output logic                 cal_we,
  output logic                 cal_half,
  output logic [HCW-1:0]       cal_addr,
  output logic signed [DW-1:0] cal_data,
  input  logic [TAPS-1:0]      mon_code,
  input  logic [HCW-1:0]       mon_cnt_ant,
  input  logic [HCW-1:0]       mon_cnt_post,
  input  logic                 buf_overrun,
  // accumulator control
  output logic                 acc_clear,
  output logic [CW-1:0]        n_acc,
  input  logic [15:0]          acc_seq,
  input  logic [CW-1:0]        acc_spec_cnt,
  input  logic                 acc_sat,
  input  logic                 acc_bank_valid,
  output logic [BW-1:0]        acc_rd_addr,
  input  logic [AW-1:0]        acc_rd_data
);

  localparam logic [31:0] ID_VALUE = 32'h4144_5253;

  // ---------------- snapshot of the TDC ----------------
  logic            snap_req, snap_taken;
  logic [TAPS-1:0] snap_code;
  logic [HCW-1:0]  snap_ant, snap_post;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap_taken <= 1'b0;
      snap_code  <= '0;
      snap_ant   <= '0;
      snap_post  <= '0;
    end else if (snap_req) begin
      snap_taken <= 1'b1;
      snap_code  <= mon_code;
      snap_ant   <= mon_cnt_ant;
      snap_post  <= mon_cnt_post;
    end
  end

  // ---------------- write channel ----------------
  logic wr_fire;
  assign wr_fire   = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_fire;
  assign s_wready  = wr_fire;
  assign s_bresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid   <= 1'b0;
      idelay_tap <= '0;
      n_acc      <= CW'(NACC);
      cal_half   <= 1'b0;
      cal_addr   <= '0;
      cal_we     <= 1'b0;
      cal_data   <= '0;
      acc_clear  <= 1'b0;
      snap_req   <= 1'b0;
    end else begin
      cal_we    <= 1'b0;
      acc_clear <= 1'b0;
      snap_req  <= 1'b0;
      if (cal_we) cal_addr <= cal_addr + 1'b1;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_fire) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          16'h0004: begin
            acc_clear <= s_wdata[0];
            snap_req  <= s_wdata[1];
          end
          16'h0008: idelay_tap <= s_wdata[IDELAY_W-1:0];
          16'h000C: n_acc      <= s_wdata[CW-1:0];
          16'h0018: begin
            cal_addr <= s_wdata[HCW-1:0];
            cal_half <= s_wdata[8];
          end
          16'h001C: begin
            cal_we   <= 1'b1;
            cal_data <= s_wdata[DW-1:0];
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------- read channel ----------------
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA, R_RESP} rstate_t;
  rstate_t          rstate;
  logic [ADDR_W-1:0] ar_q;

  assign s_arready   = (rstate == R_IDLE);
  assign s_rresp     = 2'b00;
  assign acc_rd_addr = ar_q[BW+2:3];

  function automatic logic [31:0] reg_read(input logic [ADDR_W-1:0] a);
    logic [31:0] r = '0;
    if (a[12]) begin
      logic [63:0] acc64;
      acc64 = 64'(acc_rd_data);
      r = a[2] ? acc64[63:32] : acc64[31:0];
    end else if (a >= 16'h0040 && a < 16'h0040 + 16'(4 * ((TAPS + 31) / 32))) begin
      logic [TAPS+31:0] ext;
      ext = {32'h0, snap_code};
      r   = ext[32 * ((a - 16'h0040) >> 2) +: 32];
    end else begin
      unique case (a)
        16'h0000: r = ID_VALUE;
        16'h0008: r = 32'(idelay_tap);
        16'h000C: r = 32'(n_acc);
        16'h0010: r = {12'h0, buf_overrun, acc_bank_valid, snap_taken, acc_sat, acc_seq};
        16'h0014: r = 32'(acc_spec_cnt);
        16'h0018: r = {23'h0, cal_half, 1'b0, 7'(cal_addr)};
        16'h0020: r = {9'h0, 7'(snap_post), 9'h0, 7'(snap_ant)};
        default:  r = '0;
      endcase
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate   <= R_IDLE;
      ar_q     <= '0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      unique case (rstate)
        R_IDLE: if (s_arvalid) begin
          ar_q   <= s_araddr;
          rstate <= R_ADDR;
        end
        R_ADDR: rstate <= R_DATA;      // block RAM reads ar_q
        R_DATA: begin
          s_rdata  <= reg_read(ar_q);
          s_rvalid <= 1'b1;
          rstate   <= R_RESP;
        end
        R_RESP: if (s_rready) begin
          s_rvalid <= 1'b0;
          rstate   <= R_IDLE;
        end
      endcase
    end
  end

  // AXI rule: a response stays valid until it is accepted
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);

endmodule
