// power_spectrum_tb: self-checking test of the |X|^2 unit.
//
// Streams random 25-bit bins (including the extreme values) with their bin
// numbers 0..1023 and checks, one clock later, that bins 0..511 come out with
// re^2 + im^2 computed here in 64-bit arithmetic and that bins 512..1023 are
// dropped.
`timescale 1ns/1ps
module power_spectrum_tb;
  import adrs_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [DATA_W-1:0] in_re = '0, in_im = '0;
  logic [9:0] in_idx = '0;
  logic out_valid;
  logic [8:0] out_bin;
  logic [PWR_W-1:0] out_pwr;

  int checks = 0, failures = 0;

  power_spectrum dut (.*);

  always #1.667 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint re, im, e;
    int idx;
    bit v;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4096; t++) begin
      @(negedge clk);
      v   = (t % 7) != 3;
      idx = t % 1024;
      case (t % 11)
        0: begin re = -(longint'(1) << 24); im = -(longint'(1) << 24); end
        1: begin re = (longint'(1) << 24) - 1; im = -(longint'(1) << 24); end
        default: begin
          re = longint'($urandom_range(33554431, 0)) - 16777216;
          im = longint'($urandom_range(33554431, 0)) - 16777216;
        end
      endcase
      in_valid = v;
      in_idx   = 10'(idx);
      in_re    = DATA_W'(re);
      in_im    = DATA_W'(im);
      e = re * re + im * im;
      @(posedge clk);
      #0.1;
      checks++;
      if (out_valid != (v && idx < 512)) begin
        failures++;
        $display("FAIL valid at idx %0d: %0b", idx, out_valid);
      end else if (out_valid && (out_pwr != PWR_W'(e) || out_bin != 9'(idx))) begin
        failures++;
        $display("FAIL idx %0d: pwr %0d exp %0d bin %0d", idx, out_pwr, e, out_bin);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
