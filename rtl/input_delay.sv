// input_delay -- behavioural model of the per-pin input delay element.
//
// Every FPGA input pin has a dedicated delay element that delays the signal
// in 64 steps of 75 ps (0 .. 4725 ps, "about 5 ns"). It is used to cancel
// cable-length differences and the small offsets between mean-timers, so
// that all mean-timers and all matrix inputs line up in time.
//
// The model is a tapped chain of 75 ps cells followed by a multiplexer that
// picks tap number `tap`; dout = din delayed by tap*TAP_PS. The tap setting
// is static configuration (set before a run); the vendor primitive's
// increment/load controls are not modelled.
module input_delay
  import mt_pkg::*;
#(
  parameter int unsigned TAPS   = IODELAY_TAPS,
  parameter int unsigned TAP_PS = IODELAY_STEP_PS
) (
  input  logic                    din,
  input  logic [$clog2(TAPS)-1:0] tap,
  output logic                    dout
);
  timeunit 1ps; timeprecision 1ps;

  logic [TAPS-1:0] chain;

  // chain[k] = din delayed by k steps: one bundle of TAPS-1 equal steps.
  assign chain[0] = din;
  delay_cell #(.W(TAPS - 1), .DELAY_PS(TAP_PS)) u_steps (
    .a(chain[TAPS-2:0]), .y(chain[TAPS-1:1])
  );

  assign dout = chain[tap];
endmodule
