// input_buffer_tb: self-checking test of the ADC-to-FFT frame buffer.
//
// Feeds numbered samples (sample k has value k), two per clock, first at the
// full rate and then with random gaps, and checks that frame f comes out of
// port f mod 2 in bit-reversed order, that each frame starts exactly two
// clocks after its last sample pair was written, that a port streams a frame
// on N consecutive clocks, and that no overrun is flagged.
`timescale 1ns/1ps
module input_buffer_tb;
  import adrs_pkg::*;

  localparam int N = 1024, AW = 10, FRAMES = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [DATA_W-1:0] in_s0 = '0, in_s1 = '0;
  logic [1:0] out_valid, out_sof;
  logic signed [DATA_W-1:0] out_data [2];
  logic overrun;

  int checks = 0, failures = 0;

  input_buffer dut (.*);

  always #1.667 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int bitrev(int a);
    int r = 0;
    for (int i = 0; i < AW; i++) r |= ((a >> i) & 1) << (AW - 1 - i);
    return r;
  endfunction

  int exp_q [2][$];
  longint cyc = 0;
  longint frame_end_cyc [$];
  int frames_out [2] = '{0, 0};
  int run_len [2] = '{0, 0};
  bit was_valid [2] = '{0, 0};

  always @(posedge clk) cyc <= cyc + 1;

  // output monitor
  always @(posedge clk) begin
    #0.1;
    for (int p = 0; p < 2; p++) begin
      if (out_valid[p]) begin
        int e;
        checks++;
        if (exp_q[p].size() == 0) begin
          failures++;
          $display("FAIL port %0d: unexpected word %0d", p, out_data[p]);
        end else begin
          e = exp_q[p].pop_front();
          if (out_data[p] != DATA_W'(e)) begin
            failures++;
            $display("FAIL port %0d: got %0d exp %0d", p, out_data[p], e);
          end
        end
        if (out_sof[p]) begin
          longint fe;
          checks++;
          fe = frame_end_cyc.pop_front();
          if (cyc - fe != 2) begin
            failures++;
            $display("FAIL port %0d: frame start %0d clocks after last pair", p, cyc - fe);
          end
          if (was_valid[p] && run_len[p] != N) begin
            failures++;
            $display("FAIL port %0d: frame streamed over %0d clocks", p, run_len[p]);
          end
          frames_out[p]++;
          run_len[p] = 0;
        end
        run_len[p]++;
      end
      was_valid[p] = out_valid[p];
    end
  end

  initial begin
    int k = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      for (int m = 0; m < N / 2; m++) begin
        // random gaps in the second half of the test
        if (f >= FRAMES / 2) while ($urandom_range(3, 0) == 0) begin
          @(negedge clk) in_valid = 1'b0;
        end
        @(negedge clk);
        in_valid = 1'b1;
        in_s0 = DATA_W'(k);
        in_s1 = DATA_W'(k + 1);
        k += 2;
        if (m == N / 2 - 1) begin
          for (int j = 0; j < N; j++) exp_q[f % 2].push_back(f * N + bitrev(j));
          frame_end_cyc.push_back(cyc + 1);
        end
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (2 * N + 10) @(posedge clk);
    checks++;
    if (frames_out[0] != FRAMES / 2 || frames_out[1] != FRAMES / 2 ||
        exp_q[0].size() != 0 || exp_q[1].size() != 0 || overrun) begin
      failures++;
      $display("FAIL frames out %0d/%0d, left %0d/%0d, overrun %0b", frames_out[0],
               frames_out[1], exp_q[0].size(), exp_q[1].size(), overrun);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
