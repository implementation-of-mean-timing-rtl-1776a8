// meantimer -- unclocked tapped-delay-line mean-timer.
//
// A scintillator strip read out at both ends gives a left pulse at t_l and a
// right pulse at t_r whose average does not depend on where the particle
// hit. The two pulses enter two tapped delay lines from opposite ends. AND
// number k looks at tap k of the left line and tap TAPS-1-k of the right
// line, so the left pulse reaches it at t_l + k*D and the right pulse at
// t_r + (TAPS-1-k)*D. The first AND fires where the pulses meet, at about
// (t_l + t_r + (TAPS-1)*D)/2: the mean time plus a constant, quantised to
// D/2. The OR of all ANDs (or_cascade) is the output. No clock is involved,
// so the resolution is set by the step D = 579 ps, not by a clock period.
//
// Range: the pulses meet inside the lines only if |t_l - t_r| < (TAPS-1)*D
// (~30.7 ns with the defaults). Input pulses must be wider than D, or they
// can pass each other between two taps without any AND seeing both.
//
// Interface: left, right -> mt_out, a pulse that begins at the mean time
// plus (TAPS-1)*D/2 + OR_LEVELS*OR_LEVEL_PS. Structure and sizes follow the
// original design; the AND gates are given zero delay here.
module meantimer
  import mt_pkg::*;
#(
  parameter int unsigned TAPS        = TDL_TAPS,
  parameter int unsigned STEP_PS     = TDL_STEP_PS,
  parameter int unsigned OR_LEVELS_P = OR_LEVELS,
  parameter int unsigned OR_LEVEL_D  = OR_LEVEL_PS
) (
  input  logic left,
  input  logic right,
  output logic mt_out
);
  timeunit 1ps; timeprecision 1ps;

  logic [TAPS-1:0] tap_l, tap_r, hit;

  tapped_delay_line #(.TAPS(TAPS), .STEP_PS(STEP_PS)) u_tdl_l (.din(left),  .tap(tap_l));
  tapped_delay_line #(.TAPS(TAPS), .STEP_PS(STEP_PS)) u_tdl_r (.din(right), .tap(tap_r));

  // AND k sits in the CLB that holds left tap k and right tap TAPS-1-k.
  always_comb begin
    for (int k = 0; k < TAPS; k++) hit[k] = tap_l[k] & tap_r[TAPS-1-k];
  end

  or_cascade #(.N_IN(TAPS), .LEVELS(OR_LEVELS_P), .LEVEL_PS(OR_LEVEL_D)) u_or (
    .din(hit), .dout(mt_out)
  );
endmodule
