// or_cascade_tb -- checks the OR function and the equal latency of all paths.
//
// Each of the 54 inputs alone must reach the output after 6 levels
// (6 x 250 ps); then random input patterns (including all-zero) must give
// their OR after the same latency.
module or_cascade_tb;
  timeunit 1ps; timeprecision 1ps;
  import mt_pkg::*;

  localparam longint LAT = longint'(OR_LEVELS) * OR_LEVEL_PS;

  int checks = 0, failures = 0;
  logic [TDL_TAPS-1:0] din = '0;
  logic dout;
  longint t_rise;
  int n_rise = 0;

  or_cascade u_dut (.din(din), .dout(dout));

  always @(posedge dout) begin t_rise = $time; n_rise++; end

  initial begin
    #(20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [TDL_TAPS-1:0] v);
    longint t0;
    int n_before;
    n_before = n_rise;
    t0 = $time;
    din = v;
    #2000 din = '0;
    #5000;
    checks++;
    if (|v) begin
      if (n_rise != n_before + 1 || t_rise - t0 != LAT) begin
        failures++;
        $display("FAIL pattern %h: %0d rises, latency %0d", v, n_rise - n_before, t_rise - t0);
      end
    end else if (n_rise != n_before) begin
      failures++;
      $display("FAIL all-zero input gave an output");
    end
  endtask

  initial begin
    logic [TDL_TAPS-1:0] v;
    #1000;
    for (int k = 0; k < TDL_TAPS; k++) apply(TDL_TAPS'(1) << k);
    apply('0);
    for (int n = 0; n < 100; n++) begin
      v = {$urandom, $urandom};
      if (n % 4 == 0) v = v & {$urandom, $urandom} & {$urandom, $urandom};
      apply(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
