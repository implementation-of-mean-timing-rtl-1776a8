// coincidence_matrix_tb -- checks selection and timing of the 32 x 32 matrix.
//
// A random selection pattern is loaded. Each event fires one or two H1 and
// one or two H2 channels (1 ns pulses at the reference points), H2 with a
// small random offset, or a large one that must miss. Expected results are
// computed from the selection pattern and the a/b hop delays:
//  * H1-OUT rises N*a + (N-1)*b after the H1 pulse, whatever the channel;
//  * H2-OUT rises N*b + (N-1)*a after the H2 pulse;
//  * (H1+H2)-OUT rises with the earlier of the two;
//  * MATRIX-OUT fires only if a fired pair is selected and the pulses
//    overlap, at the H1-OUT time plus the H2 lateness (the AND of the
//    coincidence line with H1-OUT).
// The test counts selected, unselected and out-of-time events and fails if
// one kind never occurred.
module coincidence_matrix_tb;
  timeunit 1ps; timeprecision 1ps;
  import mt_pkg::*;

  localparam int     N   = N_STRIPS;
  localparam longint A   = MATRIX_A_PS;
  localparam longint B   = MATRIX_B_PS;
  localparam longint W   = SHORT_PULSE_PS;
  localparam longint LH1 = N * A + (N - 1) * B;
  localparam longint LH2 = N * B + (N - 1) * A;

  int checks = 0, failures = 0;
  logic [N-1:0] h1 = '0, h2 = '0;
  logic [N-1:0][N-1:0] sel;
  logic matrix_out, h1h2_out, h1_out, h2_out, coinc_out;

  coincidence_matrix u_dut (.*);

  longint t_m, t_h1, t_h2, t_or;
  int n_m, n_h1, n_h2, n_or;
  always @(posedge matrix_out) begin if (n_m == 0) t_m = $time; n_m++; end
  always @(posedge h1_out)     begin if (n_h1 == 0) t_h1 = $time; n_h1++; end
  always @(posedge h2_out)     begin if (n_h2 == 0) t_h2 = $time; n_h2++; end
  always @(posedge h1h2_out)   begin if (n_or == 0) t_or = $time; n_or++; end

  int n_selected = 0, n_unselected = 0, n_late = 0;

  initial begin
    #(200_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int i1, i2, j1, j2;
    longint t0, dt, exp_m;
    bit two, hit;
    // Random pattern, about one pair in four selected.
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) sel[i][j] = ($urandom % 4 == 0);
    #1000;
    for (int n = 0; n < 400; n++) begin
      two = ($urandom % 4 == 0);
      i1 = $urandom % N; j1 = $urandom % N;
      i2 = two ? $urandom % N : i1;
      j2 = two ? $urandom % N : j1;
      // H2 offset: mostly within the pulse, sometimes far outside.
      dt = (n % 8 == 7) ? 3 * W : longint'($urandom % 1201) - 600;
      hit = sel[i1][j1] | sel[i1][j2] | sel[i2][j1] | sel[i2][j2];
      n_m = 0; n_h1 = 0; n_h2 = 0; n_or = 0;
      t0 = $time + 2000;
      fork
        begin #(2000) h1[i1] = 1'b1; h1[i2] = 1'b1; #(W) h1 = '0; end
        begin #(2000 + dt) h2[j1] = 1'b1; h2[j2] = 1'b1; #(W) h2 = '0; end
      join
      #(LH1 + LH2 + 10 * W);
      chk("h1_out once", n_h1 == 1 && t_h1 == t0 + LH1);
      chk("h2_out once", n_h2 == 1 && t_h2 == t0 + dt + LH2);
      chk("h1h2_out first edge", n_or >= 1 && t_or == ((t_h1 < t_h2) ? t_h1 : t_h2));
      // The pair overlaps at its pixel only if |dt| < W.
      if (hit && dt < W && dt > -W) begin
        exp_m = t0 + LH1 + ((dt > 0) ? dt : 0);
        chk("matrix_out on selected pair", n_m == 1 && t_m == exp_m);
        n_selected++;
      end else begin
        chk("matrix_out silent", n_m == 0);
        if (hit) n_late++; else n_unselected++;
      end
    end
    $display("selected %0d, unselected %0d, out of time %0d", n_selected, n_unselected, n_late);
    chk("coverage", n_selected > 0 && n_unselected > 0 && n_late > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
