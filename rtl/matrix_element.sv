// matrix_element -- one pixel of the coincidence matrix.
//
// A 3-input AND of the H1 channel, the H2 channel and a static select bit
// tells whether this channel pair fired together and is enabled; its result
// is OR-ed into the coincidence-information line that runs through the
// elements. H1 and H2 are passed on unchanged to the next elements, which
// lets one H1 and one H2 line serve a whole column and row. This follows the
// original pixel exactly; the gates are given zero delay, the interconnect
// delays live in coincidence_matrix.
//
// Interface: purely combinational; sel must be static while pulses arrive.
module matrix_element (
  input  logic h1_in,
  input  logic h2_in,
  input  logic sel,
  input  logic coinc_in,
  output logic h1_out,
  output logic h2_out,
  output logic coinc_out
);
  timeunit 1ps; timeprecision 1ps;

  assign h1_out    = h1_in;
  assign h2_out    = h2_in;
  assign coinc_out = (h1_in & h2_in & sel) | coinc_in;
endmodule
