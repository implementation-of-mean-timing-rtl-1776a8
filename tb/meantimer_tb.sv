// meantimer_tb -- checks the mean-timing of one tapped-delay-line mean-timer.
//
// Left and right pulses of 1 ns are sent with random time differences
// t_l - t_r. Two independent checks per event:
//  * exact time: a reference computes, for every AND k, when the left pulse
//    (t_l + k*D) and right pulse (t_r + (53-k)*D) overlap, takes the first
//    overlap and adds the OR cascade latency;
//  * mean-time property: t_out - (t_l+t_r)/2 must equal the constant
//    53*D/2 + 6*250 ps to within one half step D/2, for any t_l - t_r in range.
// Events with |t_l - t_r| beyond the line length plus the pulse width must
// give no output.
module meantimer_tb;
  timeunit 1ps; timeprecision 1ps;
  import mt_pkg::*;

  localparam longint D     = TDL_STEP_PS;
  localparam longint W     = SHORT_PULSE_PS;
  localparam longint OR_L  = longint'(OR_LEVELS) * OR_LEVEL_PS;
  localparam longint SPAN  = longint'(TDL_TAPS - 1) * D;

  int checks = 0, failures = 0;
  logic left = 1'b0, right = 1'b0, mt_out;
  longint t_out;
  int n_out = 0;
  int n_in_range = 0, n_out_of_range = 0;

  meantimer u_dut (.left(left), .right(right), .mt_out(mt_out));

  always @(posedge mt_out) begin
    if (n_out == 0 || t_out < 0) t_out = $time;
    n_out++;
  end

  // First time an AND sees both pulses, or -1 if none does.
  function automatic longint ref_fire(longint tl, longint tr);
    longint best = -1;
    for (int k = 0; k < TDL_TAPS; k++) begin
      longint ta = tl + k * D;
      longint tb = tr + (TDL_TAPS - 1 - k) * D;
      longint lo = (ta < tb) ? ta : tb;
      longint hi = (ta < tb) ? tb : ta;
      if (hi < lo + W && (best < 0 || hi < best)) best = hi;
    end
    return (best < 0) ? -1 : best + OR_L;
  endfunction

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint base, tl, tr, dt, exp_t, mean2, off2;
    #1000;
    for (int n = 0; n < 300; n++) begin
      // dt uniformly within +-(SPAN + 2W), so some events fall outside the range.
      dt = longint'($urandom % (2 * (SPAN + 2 * W))) - (SPAN + 2 * W);
      if (n == 0) dt = 0;
      base = $time + 1000;
      tl = base + ((dt > 0) ? dt : 0);
      tr = base + ((dt < 0) ? -dt : 0);
      n_out = 0;
      t_out = -1;
      fork
        begin #(tl - $time) left = 1'b1; #(W) left = 1'b0; end
        begin #(tr - $time) right = 1'b1; #(W) right = 1'b0; end
      join
      #(SPAN + 4 * W + OR_L);
      exp_t = ref_fire(tl, tr);
      checks++;
      if (exp_t < 0) begin
        n_out_of_range++;
        if (n_out != 0) begin failures++; $display("FAIL dt=%0d: output out of range", dt); end
      end else begin
        n_in_range++;
        if (n_out == 0 || t_out != exp_t) begin
          failures++;
          $display("FAIL dt=%0d: output at %0d, expected %0d (%0d edges)", dt, t_out - base, exp_t - base, n_out);
        end
        // Mean-time property, in units of ps*2 to stay integer.
        if (dt > -(SPAN - W) && dt < (SPAN - W)) begin
          checks++;
          mean2 = tl + tr;
          off2  = 2 * t_out - mean2 - (SPAN + 2 * OR_L);
          if (off2 < 0 || off2 > D) begin
            failures++;
            $display("FAIL dt=%0d: output - mean time off by %0d/2 ps", dt, off2);
          end
        end
      end
    end
    $display("events in range %0d, out of range %0d", n_in_range, n_out_of_range);
    checks++;
    if (n_in_range == 0 || n_out_of_range == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
