// adrs_pkg: shared constants and types of the all-digital radio spectrometer.
//
// The spectrometer digitises an IF signal inside the FPGA with a delay-line
// ramp-compare ADC (two samples per 300 MHz clock, 600 MSa/s), transforms
// 1024-sample frames with two radix-2 decimation-in-time FFT cores, squares
// the first 512 bins and integrates 65,536 spectra.  The numbers below that
// come from the published prototype are: 200 delay-line taps split into two
// halves of 100, 25-bit data words, 18-bit twiddle factors, 1024-point FFT,
// 512 output channels, 65,536 accumulations, 32 input-delay levels.  The
// accumulator width, the twiddle scaling and the AXI register map are this
// design's own choices.
package adrs_pkg;

  // ADC / TDC
  localparam int unsigned TDL_TAPS   = 200;          // carry elements in the delay line
  localparam int unsigned HALF_TAPS  = TDL_TAPS / 2; // anterior / posterior half
  localparam int unsigned CNT_W      = $clog2(HALF_TAPS + 1); // popcount 0..100
  localparam int unsigned IDELAY_W   = 5;            // 32 delay levels

  // FFT
  localparam int unsigned DATA_W     = 25;           // sample and intermediate width
  localparam int unsigned TW_W       = 18;           // twiddle-factor width
  localparam int unsigned TW_FRAC    = 16;           // twiddle = round(2^16 * cos/sin)
  localparam int unsigned FFT_N      = 1024;
  localparam int unsigned LOG2_N     = 10;

  // spectrum
  localparam int unsigned N_CHAN     = FFT_N / 2;    // 512 frequency points
  localparam int unsigned PWR_W      = 2 * DATA_W;   // re^2 + im^2 < 2^49
  localparam int unsigned ACC_W      = 64;           // accumulated power (saturating)
  localparam int unsigned N_ACC      = 65536;        // spectra per integration

  // complex sample
  typedef struct packed {
    logic signed [DATA_W-1:0] re;
    logic signed [DATA_W-1:0] im;
  } cplx_t;

  // one ADC clock delivers two samples: the earlier and the later edge
  typedef struct packed {
    logic signed [DATA_W-1:0] s0;  // earlier sample (posterior half, negative edge)
    logic signed [DATA_W-1:0] s1;  // later sample (anterior half, positive edge)
  } adc_pair_t;

endpackage
