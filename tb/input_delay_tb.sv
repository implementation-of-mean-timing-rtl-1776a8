// input_delay_tb -- checks all 64 tap settings of the input delay model.
//
// For every tap value a pulse is sent and the delay of its rising and
// falling edges is compared with tap*75 ps.
module input_delay_tb;
  timeunit 1ps; timeprecision 1ps;
  import mt_pkg::*;

  int checks = 0, failures = 0;
  logic din = 1'b0;
  iodelay_tap_t tap = '0;
  logic dout;
  longint t_rise, t_fall;

  input_delay u_dut (.din(din), .tap(tap), .dout(dout));

  always @(posedge dout) t_rise = $time;
  always @(negedge dout) t_fall = $time;

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
    for (int k = 0; k < IODELAY_TAPS; k++) begin
      tap = iodelay_tap_t'(k);
      #10000;
      t0 = $time;
      din = 1'b1;
      #2000 din = 1'b0;
      #10000;
      checks += 2;
      if (t_rise - t0 != longint'(k) * 75 || t_fall - t0 != 2000 + longint'(k) * 75) begin
        failures++;
        $display("FAIL tap %0d: rise +%0d fall +%0d", k, t_rise - t0, t_fall - t0);
      end
    end
    $display("max delay %0d ps", t_rise - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
