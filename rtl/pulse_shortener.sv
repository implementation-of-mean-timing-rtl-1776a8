// pulse_shortener -- cuts an input pulse down to a fixed width.
//
// A signal that is still high when the opposite signal has already left the
// tapped delay line would mask the meeting point of the two pulses, so the
// original design shortens the inputs inside the FPGA to a width of 1 ns.
// This module does it without a clock: dout = din AND NOT(din delayed by
// WIDTH_PS). A rising edge of din therefore starts an output pulse that ends
// WIDTH_PS later, or earlier if din falls first. The gate structure is this
// model's choice; the original names only the result.
//
// Interface: din -> dout, no added latency on the rising edge. din must stay
// low for at least WIDTH_PS between pulses.
module pulse_shortener
  import mt_pkg::*;
#(
  parameter int unsigned WIDTH_PS = SHORT_PULSE_PS
) (
  input  logic din,
  output logic dout
);
  timeunit 1ps; timeprecision 1ps;

  logic din_late;

  delay_cell #(.DELAY_PS(WIDTH_PS)) u_width (.a(din), .y(din_late));

  assign dout = din & ~din_late;
endmodule
