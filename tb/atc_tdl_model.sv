// atc_tdl_model: behavioural model of the analog front end of the ADC, for
// simulation only.
//
// Models what sits in front of the delay-line flip-flops: the comparator
// (LVDS input, IF signal A_in on P, reference V_ref on N), the triangular
// reference made from a clock-manager square wave by an RC filter, the
// programmable input delay (32 levels over 0..1600 ps) and the 200-element
// carry chain (16.67 ps per element).  Before every rising clock edge it
// computes the level of each tap: tap i shows the comparator output of
// i * TAU_PS earlier, shifted by the input delay and by an uncalibrated path
// offset PHASE_OFF_PS.  The reference is a triangle with the clock period,
// falling from +VREF_MV to -VREF_MV in the first half and rising in the
// second, bent by a cubic term (BEND) so that, as in a real RC-shaped
// reference, its slope is not constant.  The IF input is dc_mv + tone_mv *
// sin(2*pi*tone_hz*t); it is evaluated once per ramp half, at the middle of
// the half, which is where its crossing lies for small signals.
`timescale 1ns/1ps
module atc_tdl_model #(
  parameter int  TAPS         = 200,
  parameter real TAU_PS       = 16.67,
  parameter real IDELAY_PS    = 1600.0 / 31.0,   // per level
  parameter real PHASE_OFF_PS = 0.0,
  parameter real VREF_MV      = 50.0,
  parameter real BEND         = 0.3
) (
  input  logic            clk,
  input  logic [4:0]      idelay_tap,
  input  real             dc_mv,
  input  real             tone_mv,
  input  real             tone_hz,
  output logic [TAPS-1:0] taps
);
  localparam real PI    = 3.14159265358979323846;
  localparam real T_PS  = TAU_PS * TAPS;       // one clock period

  // reference voltage at phase ph (0..1) of the clock period
  function automatic real vref(real ph);
    real u;
    // u runs +1 -> -1 over the first half and -1 -> +1 over the second
    u = (ph < 0.5) ? 1.0 - 4.0 * ph : -3.0 + 4.0 * ph;
    return VREF_MV * (u + BEND * (u * u * u - u));
  endfunction

  function automatic real a_in(real t_ps);
    return dc_mv + tone_mv * $sin(2.0 * PI * tone_hz * t_ps * 1.0e-12);
  endfunction

  initial taps = '0;

  always @(negedge clk) begin
    real t_s, shift, a_late, a_early;
    t_s   = $realtime * 1000.0 + T_PS / 2.0;          // next rising edge, ps
    shift = real'(idelay_tap) * IDELAY_PS - PHASE_OFF_PS;
    a_late  = a_in(t_s - 0.25 * T_PS);
    a_early = a_in(t_s - 0.75 * T_PS);
    for (int i = 0; i < TAPS; i++) begin
      real t, ph;
      t  = -real'(i) * TAU_PS - shift;                // relative to the edge
      ph = t / T_PS - $floor(t / T_PS);
      taps[i] <= ((i < TAPS / 2) ? a_late : a_early) > vref(ph);
    end
  end
endmodule
