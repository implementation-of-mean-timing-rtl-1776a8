// Shared constants of the unclocked mean-timer and coincidence trigger.
//
// All times are integer picoseconds. The numbers marked "paper" are the
// figures of the original FPGA implementation (Virtex-5, speed grade 2);
// the others are choices of this model, where the original gives none.
package mt_pkg;
  timeunit 1ps; timeprecision 1ps;

  // Hodoscope geometry (paper): 32 strips per hodoscope, two hodoscopes.
  localparam int unsigned N_STRIPS = 32;

  // Tapped delay line (paper): 53 delays of 579 ps, hence 54 LUT taps.
  localparam int unsigned TDL_TAPS    = 54;
  localparam int unsigned TDL_STEP_PS = 579;

  // OR cascade (paper): 6 levels of 2-input ORs. Per-level delay: model choice.
  localparam int unsigned OR_LEVELS   = 6;
  localparam int unsigned OR_LEVEL_PS = 250;

  // Input delay element (paper): 64 steps of 75 ps.
  localparam int unsigned IODELAY_TAPS    = 64;
  localparam int unsigned IODELAY_STEP_PS = 75;
  typedef logic [$clog2(IODELAY_TAPS)-1:0] iodelay_tap_t;

  // Pulse shortening inside the FPGA (paper): 1 ns.
  localparam int unsigned SHORT_PULSE_PS = 1000;

  // Matrix interconnect hops a_k (upward) and b_k (rightward): model choice,
  // the original takes them from its place-and-route result.
  localparam int unsigned MATRIX_A_PS = 500;
  localparam int unsigned MATRIX_B_PS = 700;
endpackage
