// tapped_delay_line_tb -- checks the arrival time at every tap.
//
// A pulse is sent into the 54-tap line; tap k must rise k*579 ps later.
// Repeated with random pulse widths above the step.
module tapped_delay_line_tb;
  timeunit 1ps; timeprecision 1ps;
  import mt_pkg::*;

  int checks = 0, failures = 0;
  logic din = 1'b0;
  logic [TDL_TAPS-1:0] tap, tap_q = '0;
  longint t_rise [TDL_TAPS];

  tapped_delay_line u_dut (.din(din), .tap(tap));

  always @(tap) begin
    for (int k = 0; k < TDL_TAPS; k++) if (tap[k] && !tap_q[k]) t_rise[k] = $time;
    tap_q = tap;
  end

  initial begin
    #(10_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    #1000;
    for (int n = 0; n < 10; n++) begin
      t0 = $time;
      din = 1'b1;
      #(1000 + ($urandom % 3000)) din = 1'b0;
      #50000;
      for (int k = 0; k < TDL_TAPS; k++) begin
        checks++;
        if (t_rise[k] - t0 != longint'(k) * TDL_STEP_PS) begin
          failures++;
          $display("FAIL tap %0d: +%0d ps", k, t_rise[k] - t0);
        end
      end
    end
    $display("line length %0d ps", t_rise[TDL_TAPS-1] - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
