// tapped_delay_line -- chain of LUT delay elements with every stage tapped.
//
// In the original design each CLB of a column holds one LUT of the line;
// the line steps from CLB to CLB over a routed path of 579 ps and every LUT
// output also goes to the AND LUT of the same CLB. 54 LUTs give 53 steps,
// 53 x 579 ps ~ 30 ns of range.
//
// Interface: tap[k] = din delayed by k*STEP_PS, k = 0 .. TAPS-1; tap[0] is
// the entry of the line. The line has no direction of its own: a mean-timer
// uses two of them and reverses the index of one.
module tapped_delay_line
  import mt_pkg::*;
#(
  parameter int unsigned TAPS    = TDL_TAPS,
  parameter int unsigned STEP_PS = TDL_STEP_PS
) (
  input  logic            din,
  output logic [TAPS-1:0] tap
);
  timeunit 1ps; timeprecision 1ps;

  // Step k (LUT k-1 to LUT k) for all k at once: the TAPS-1 inter-CLB routes
  // are equal, so they are modelled as one bundle of parallel delays.
  assign tap[0] = din;
  delay_cell #(.W(TAPS - 1), .DELAY_PS(STEP_PS)) u_steps (
    .a(tap[TAPS-2:0]), .y(tap[TAPS-1:1])
  );
endmodule
