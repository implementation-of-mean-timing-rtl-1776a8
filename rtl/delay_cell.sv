// delay_cell -- behavioural model (not synthesizable as a delay).
//
// Stands for routed delay elements of the FPGA fabric: a LUT used as a
// buffer together with the route to the next LUT, or a bundle of W such
// routes of equal delay side by side. In the original design the routes were
// found by placing LUTs in chosen CLBs and measuring the routed path; two
// opposite inter-CLB paths of 579 ps each form the steps of the tapped delay
// lines. The same cell models the input-delay taps, the OR-cascade levels,
// the matrix interconnect hops and the matrix input compensation, each with
// its own DELAY_PS.
//
// Interface: a -> y, W bits wide; every edge of every bit of a reappears on
// the same bit of y DELAY_PS picoseconds later (transport delay). A route
// longer than a pulse is a chain of many short elements in silicon and so
// passes the pulse whole; an inertial continuous-assignment delay would
// swallow it, hence the explicit scheduling of each change: each pending
// update carries the captured value and the mask of bits that changed, so
// updates that fall due at the same time do not overwrite each other.
// Values settled at time zero are taken as the power-up steady state and
// pass at once. DELAY_PS = 0 gives plain wires. For synthesis (SYNTHESIS defined) the
// cell is a wire: the delay is then a matter of placement and routing.
module delay_cell #(
  parameter int unsigned W        = 1,
  parameter int unsigned DELAY_PS = 579
) (
  input  logic [W-1:0] a,
  output logic [W-1:0] y
);
  timeunit 1ps; timeprecision 1ps;

`ifdef SYNTHESIS
  // In silicon the delay is the placed route itself: logically a wire.
  assign y = a;
`else
  if (DELAY_PS == 0) begin : g_wire
    assign y = a;
  end else begin : g_delay
    logic [W-1:0] seen;
    initial begin
      y    = a;
      seen = a;
      forever begin
        @(a);
        if ($time == 0) begin
          // Power-up: whatever the inputs settle to at time zero is the
          // steady state, so it passes at once instead of as a fake edge.
          y    = a;
          seen = a;
          continue;
        end
        fork
          automatic logic [W-1:0] v = a;
          automatic logic [W-1:0] m = a ^ seen;
          begin
            #(DELAY_PS);
            y = (y & ~m) | (v & m);
          end
        join_none
        seen = a;
      end
    end
  end
`endif
endmodule
