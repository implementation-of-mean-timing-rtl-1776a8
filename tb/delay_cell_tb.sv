// delay_cell_tb -- checks the delay of the routed delay element model.
//
// Sends pulses through a 579 ps cell (the tapped-delay-line step) and a
// 75 ps cell (one input-delay tap) and checks that both edges come out
// exactly DELAY_PS later, including a pulse shorter than the delay
// (transport behaviour, as a long route made of many short elements).
module delay_cell_tb;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;
  logic a = 1'b0;
  logic y_tdl, y_tap;
  longint t_rise_tdl, t_fall_tdl, t_rise_tap, n_rise_tdl = 0;

  delay_cell #(.DELAY_PS(579)) u_tdl (.a(a), .y(y_tdl));
  delay_cell #(.DELAY_PS(75))  u_tap (.a(a), .y(y_tap));

  always @(posedge y_tdl) begin t_rise_tdl = $time; n_rise_tdl++; end
  always @(negedge y_tdl) t_fall_tdl = $time;
  always @(posedge y_tap) t_rise_tap = $time;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #(5_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    #1000;
    for (int n = 0; n < 20; n++) begin
      int unsigned w = 1000 + ($urandom % 4000);
      t0 = $time;
      a = 1'b1;
      #(w) a = 1'b0;
      #5000;
      check("tdl rise", t_rise_tdl - t0, 579);
      check("tdl fall", t_fall_tdl - t0, longint'(w) + 579);
      check("tap rise", t_rise_tap - t0, 75);
    end
    // A 200 ps pulse is shorter than 579 ps and must still come out whole.
    begin
      longint n_before;
      n_before = n_rise_tdl;
      t0 = $time;
      a = 1'b1;
      #200 a = 1'b0;
      #3000;
      check("short pulse passed", n_rise_tdl - n_before, 1);
      check("short pulse rise", t_rise_tdl - t0, 579);
      check("short pulse fall", t_fall_tdl - t0, 779);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
