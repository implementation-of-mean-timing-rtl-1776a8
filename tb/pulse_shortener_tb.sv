// pulse_shortener_tb -- checks that pulses are cut to 1 ns.
//
// Random input widths from 200 ps to 20 ns: the output must rise with the
// input and last min(width, 1000 ps), and there must be one output pulse per
// input pulse.
module pulse_shortener_tb;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;
  logic din = 1'b0, dout;
  longint t_rise, t_fall;
  int n_pulses = 0;

  pulse_shortener u_dut (.din(din), .dout(dout));

  always @(posedge dout) begin t_rise = $time; n_pulses++; end
  always @(negedge dout) t_fall = $time;

  initial begin
    #(20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, exp_w;
    int unsigned w;
    #1000;
    for (int n = 0; n < 100; n++) begin
      w = 200 + ($urandom % 19800);
      if (n < 2) w = (n == 0) ? 600 : 10000;
      t0 = $time;
      din = 1'b1;
      #(w) din = 1'b0;
      #25000;
      exp_w = (w < 1000) ? longint'(w) : 1000;
      checks += 3;
      if (t_rise != t0) begin failures++; $display("FAIL rise at %0d, input at %0d", t_rise, t0); end
      if (t_fall - t_rise != exp_w) begin
        failures++; $display("FAIL width %0d for input %0d", t_fall - t_rise, w);
      end
      if (n_pulses != n + 1) begin failures++; $display("FAIL %0d pulses after %0d inputs", n_pulses, n + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
