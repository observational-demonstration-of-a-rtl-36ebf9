// power_spectrum: power of each FFT bin, |X|^2 = re^2 + im^2.
//
// Takes the natural-order bin stream of one FFT core and passes on the power
// of the first N/2 bins only: for a real input the upper half mirrors the
// lower, so the 1024-point transform yields the 512 frequency points of the
// published prototype.  The squares are exact (2 x 25-bit products, 50-bit
// result); no scaling is applied (this design's choice).
//
// Timing: one register stage; out_* follow in_* by one clock.
module power_spectrum
  import adrs_pkg::*;
#(
  parameter int unsigned LOG2N = LOG2_N,
  parameter int unsigned DW    = DATA_W,
  localparam int unsigned PW   = 2 * DW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [DW-1:0]  in_re,
  input  logic signed [DW-1:0]  in_im,
  input  logic [LOG2N-1:0]      in_idx,
  output logic                  out_valid,
  output logic [LOG2N-2:0]      out_bin,
  output logic [PW-1:0]         out_pwr
);

  logic signed [PW-1:0] sq_re, sq_im;
  always_comb begin
    logic signed [PW-1:0] xr, xi;
    xr    = PW'(in_re);
    xi    = PW'(in_im);
    sq_re = xr * xr;
    sq_im = xi * xi;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_bin   <= '0;
      out_pwr   <= '0;
    end else begin
      out_valid <= in_valid && !in_idx[LOG2N-1];
      out_bin   <= in_idx[LOG2N-2:0];
      out_pwr   <= PW'($unsigned(sq_re)) + PW'($unsigned(sq_im));
    end
  end

endmodule
