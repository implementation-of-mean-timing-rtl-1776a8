// trigger_top_tb -- end-to-end test of the mean-timer trigger at full size.
//
// Simulates particles crossing strip i of hodoscope H1 and strip j of H2.
// For a hit at distance x (cm) from the left end of a 250 cm strip, light
// reaches the left PMT after x*80 ps and the right one after (250-x)*80 ps
// (20 ns for the whole strip). Each of the 128 inputs has its own random
// cable delay, a multiple of 75 ps, and its input delay tap is set so that
// cable + tap is the same for every input. PMT pulses are 10 ns long and
// are cut to 1 ns inside the design.
//
// Independent expectations per event:
//  * the hit strip's mean-timer fires once, at the mean of its two input
//    times plus 53*579/2 + 6*250 ps, within half a delay step, wherever x is;
//    every other mean-timer stays silent;
//  * H1-OUT / H2-OUT rise N*a + (N-1)*b / N*b + (N-1)*a after the mean-timer;
//  * MATRIX-OUT fires only if sel[i][j] is set and the two mean-timer pulses
//    overlap, N*a + (N-1)*b after the later of the two.
// Event kinds, each counted and required at least once: selected pair
// (trigger), unselected pair (halo, suppressed), selected pair with H2 5 ns
// late (out of time, suppressed), H1 alone, hits near a strip end, input
// delay compensation in use and pulse shortening in use.
module trigger_top_tb;
  timeunit 1ps; timeprecision 1ps;
  import mt_pkg::*;

  localparam int     N      = N_STRIPS;
  localparam longint PS_CM  = 80;          // light propagation, 250 cm ~ 20 ns
  localparam longint LEN_CM = 250;
  localparam longint RAW_W  = 10000;       // discriminator pulse width
  localparam int     TOFF   = 40;          // cable + tap = TOFF * 75 ps on every input
  localparam longint D      = TDL_STEP_PS;
  localparam longint MT_C2  = longint'(TDL_TAPS - 1) * D + 2 * longint'(OR_LEVELS) * OR_LEVEL_PS;
  localparam longint LH1    = longint'(N) * MATRIX_A_PS + longint'(N - 1) * MATRIX_B_PS;
  localparam longint LH2    = longint'(N) * MATRIX_B_PS + longint'(N - 1) * MATRIX_A_PS;
  localparam int     EVENTS = 48;

  int checks = 0, failures = 0;

  logic [N-1:0] h1_l = '0, h1_r = '0, h2_l = '0, h2_r = '0;
  iodelay_tap_t [N-1:0] tap_h1_l, tap_h1_r, tap_h2_l, tap_h2_r;
  logic [N-1:0][N-1:0] sel;
  logic [N-1:0] mt_h1, mt_h2;
  logic matrix_out, h1h2_out, h2_out, h1_out, coinc_out;

  trigger_top u_dut (.*);

  // Cable delay of each input, in 75 ps units.
  int cab_h1_l [N], cab_h1_r [N], cab_h2_l [N], cab_h2_r [N];

  // Edge recorders.
  longint r_mt1 [N], f_mt1 [N], r_mt2 [N], f_mt2 [N];
  int     n_mt1 [N], n_mt2 [N];
  longint t_m, t_h1, t_h2, t_or;
  int     n_m, n_h1, n_h2, n_or;

  for (genvar s = 0; s < N; s++) begin : g_rec
    always @(posedge mt_h1[s]) begin if (n_mt1[s] == 0) r_mt1[s] = $time; n_mt1[s]++; end
    always @(negedge mt_h1[s]) f_mt1[s] = $time;
    always @(posedge mt_h2[s]) begin if (n_mt2[s] == 0) r_mt2[s] = $time; n_mt2[s]++; end
    always @(negedge mt_h2[s]) f_mt2[s] = $time;
  end
  always @(posedge matrix_out) begin if (n_m == 0)  t_m  = $time; n_m++;  end
  always @(posedge h1_out)     begin if (n_h1 == 0) t_h1 = $time; n_h1++; end
  always @(posedge h2_out)     begin if (n_h2 == 0) t_h2 = $time; n_h2++; end
  always @(posedge h1h2_out)   begin if (n_or == 0) t_or = $time; n_or++; end

  // Mechanism counters.
  int n_trigger = 0, n_halo = 0, n_late = 0, n_single = 0, n_edge = 0, n_comp = 0, n_short = 0;

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Drive one end of one strip: a RAW_W pulse at time t (absolute).
  task automatic pulse(ref logic [N-1:0] v, input int s, input longint t);
    #(t - $time);
    v[s] = 1'b1;
    #(RAW_W);
    v[s] = 1'b0;
  endtask

  // Check a mean-timer against the two times at which its inputs left the
  // input delays: 2*t_mt - (t_l + t_r) - MT_C2 must lie in [0, D].
  function automatic bit mt_ok(longint t_mt, longint tl, longint tr);
    longint off2 = 2 * t_mt - tl - tr - MT_C2;
    return off2 >= 0 && off2 <= D;
  endfunction

  initial begin
    #(64'd20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int i, j, kind;
    longint x1, x2, t0, t2, tl1, tr1, tl2, tr2, late, exp_m;
    bit with_h2, hit, overlap;
    // Configuration: random cables, taps compensate them; a diagonal band of
    // selected pairs, like the pattern used to keep target-pointing tracks.
    for (int s = 0; s < N; s++) begin
      cab_h1_l[s] = $urandom % (TOFF + 1); tap_h1_l[s] = iodelay_tap_t'(TOFF - cab_h1_l[s]);
      cab_h1_r[s] = $urandom % (TOFF + 1); tap_h1_r[s] = iodelay_tap_t'(TOFF - cab_h1_r[s]);
      cab_h2_l[s] = $urandom % (TOFF + 1); tap_h2_l[s] = iodelay_tap_t'(TOFF - cab_h2_l[s]);
      cab_h2_r[s] = $urandom % (TOFF + 1); tap_h2_r[s] = iodelay_tap_t'(TOFF - cab_h2_r[s]);
    end
    for (int a = 0; a < N; a++)
      for (int b = 0; b < N; b++) sel[a][b] = (a >= b - 1) && (a <= b + 1);
    #5000;

    for (int n = 0; n < EVENTS; n++) begin
      kind = n % 4;   // 0 trigger, 1 halo, 2 out of time, 3 H1 alone
      i = $urandom % N;
      case (kind)
        0, 2:    j = (i + N - 1 + $urandom % 3) % N;   // inside the band
        1:       j = (i + 3 + $urandom % (N - 5)) % N; // outside the band
        default: j = $urandom % N;
      endcase
      if (kind == 0 || kind == 2) begin
        if (!sel[i][j]) j = i;
      end
      with_h2 = (kind != 3);
      late    = (kind == 2) ? 5000 : 0;
      x1 = (n % 6 == 0) ? 2 : longint'($urandom % (LEN_CM + 1));
      x2 = (n % 6 == 1) ? LEN_CM - 3 : longint'($urandom % (LEN_CM + 1));
      if (x1 < 25 || x1 > LEN_CM - 25) n_edge++;

      t0 = $time + 2000;
      t2 = t0 + late;
      // Times at which each signal leaves its input delay (cable + tap = TOFF*75).
      tl1 = t0 + x1 * PS_CM + TOFF * 75;
      tr1 = t0 + (LEN_CM - x1) * PS_CM + TOFF * 75;
      tl2 = t2 + x2 * PS_CM + TOFF * 75;
      tr2 = t2 + (LEN_CM - x2) * PS_CM + TOFF * 75;
      if (cab_h1_l[i] != TOFF || cab_h1_r[i] != TOFF) n_comp++;
      n_short++;

      for (int s = 0; s < N; s++) begin n_mt1[s] = 0; n_mt2[s] = 0; end
      n_m = 0; n_h1 = 0; n_h2 = 0; n_or = 0;
      fork
        pulse(h1_l, i, t0 + x1 * PS_CM + cab_h1_l[i] * 75);
        pulse(h1_r, i, t0 + (LEN_CM - x1) * PS_CM + cab_h1_r[i] * 75);
        if (with_h2) pulse(h2_l, j, t2 + x2 * PS_CM + cab_h2_l[j] * 75);
        if (with_h2) pulse(h2_r, j, t2 + (LEN_CM - x2) * PS_CM + cab_h2_r[j] * 75);
      join
      #(LH1 + LH2 + 60000);

      // Mean-timers.
      chk("H1 mean-timer fired once", n_mt1[i] == 1);
      chk("H1 mean time", mt_ok(r_mt1[i], tl1, tr1));
      for (int s = 0; s < N; s++) begin
        if (s != i) chk("other H1 mean-timers silent", n_mt1[s] == 0);
        if (!with_h2 || s != j) chk("other H2 mean-timers silent", n_mt2[s] == 0);
      end
      if (with_h2) begin
        chk("H2 mean-timer fired once", n_mt2[j] == 1);
        chk("H2 mean time", mt_ok(r_mt2[j], tl2, tr2));
      end
      // Hodoscope ORs.
      chk("H1-OUT timing", n_h1 == 1 && t_h1 == r_mt1[i] + LH1);
      if (with_h2) chk("H2-OUT timing", n_h2 == 1 && t_h2 == r_mt2[j] + LH2);
      else         chk("H2-OUT silent", n_h2 == 0);
      chk("(H1+H2)-OUT", n_or >= 1 && t_or == ((with_h2 && t_h2 < t_h1) ? t_h2 : t_h1));
      // Trigger.
      hit = with_h2 && sel[i][j];
      overlap = with_h2 && (r_mt1[i] < f_mt2[j]) && (r_mt2[j] < f_mt1[i]);
      if (hit && overlap) begin
        exp_m = ((r_mt1[i] > r_mt2[j]) ? r_mt1[i] : r_mt2[j]) + LH1;
        chk("MATRIX-OUT on selected pair", n_m == 1 && t_m == exp_m);
        n_trigger++;
      end else begin
        chk("MATRIX-OUT silent", n_m == 0);
        if (hit) n_late++;
        else if (with_h2) n_halo++;
        else n_single++;
      end
      if (n < 4 || failures > 0 && failures < 4)
        $display("event %0d kind %0d: H1 %0d x=%0d, H2 %0d x=%0d, mt1 %0d mt2 %0d, matrix %0d",
                 n, kind, i, x1, j, x2, r_mt1[i] - t0, with_h2 ? r_mt2[j] - t0 : 0, n_m);
    end

    $display("trigger %0d, halo suppressed %0d, out of time %0d, H1 alone %0d, strip-end hits %0d, compensated %0d, shortened %0d",
             n_trigger, n_halo, n_late, n_single, n_edge, n_comp, n_short);
    chk("selected coincidence seen", n_trigger > 0);
    chk("halo suppression seen", n_halo > 0);
    chk("out-of-time suppression seen", n_late > 0);
    chk("single hodoscope seen", n_single > 0);
    chk("strip-end hits seen", n_edge > 0);
    chk("input compensation used", n_comp > 0);
    chk("pulse shortening used", n_short > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
