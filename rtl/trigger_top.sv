// trigger_top -- mean-timer and coincidence trigger for two hodoscopes.
//
// Two hodoscopes of N scintillator strips each are read out at both strip
// ends. Each of the 4*N discriminated PMT signals passes an input delay
// (64 x 75 ps, used to cancel cable and internal differences) and, when
// SHORTEN is set, a 1 ns pulse shortener. Each strip's left/right pair
// drives one unclocked mean-timer, whose output no longer depends on where
// along the strip the particle passed. The N H1 and N H2 mean-timer outputs
// feed the coincidence matrix, which gives the four outputs: MATRIX-OUT (the
// trigger), (H1+H2)-OUT, H2-OUT and H1-OUT.
//
// Nothing is clocked: every output edge is derived from input edges through
// fixed delays. The chain and sizes follow the original FPGA design. The
// delay taps and the matrix selection are static ports here; the original
// sets them through its board's VME access. The place of the shortener
// (after the input delay) and its default use are this model's choices.
//
// Latency from the mean time of a strip to its mean-timer output:
// (TDL_TAPS-1)*TDL_STEP_PS/2 + OR_LEVELS*OR_LEVEL_PS plus the input delay;
// from there to h1_out / matrix_out: N*MATRIX_A_PS + (N-1)*MATRIX_B_PS.
module trigger_top
  import mt_pkg::*;
#(
  parameter int unsigned N       = N_STRIPS,
  parameter bit          SHORTEN = 1'b1
) (
  // Discriminated PMT signals: hodoscope H1/H2, left/right strip end.
  input  logic [N-1:0]               h1_l,
  input  logic [N-1:0]               h1_r,
  input  logic [N-1:0]               h2_l,
  input  logic [N-1:0]               h2_r,
  // Static configuration.
  input  iodelay_tap_t [N-1:0]       tap_h1_l,
  input  iodelay_tap_t [N-1:0]       tap_h1_r,
  input  iodelay_tap_t [N-1:0]       tap_h2_l,
  input  iodelay_tap_t [N-1:0]       tap_h2_r,
  input  logic [N-1:0][N-1:0]        sel,        // sel[i][j]: H1 strip i with H2 strip j
  // Mean-timer outputs, for monitoring.
  output logic [N-1:0]               mt_h1,
  output logic [N-1:0]               mt_h2,
  // Outputs.
  output logic                       matrix_out,
  output logic                       h1h2_out,
  output logic                       h2_out,
  output logic                       h1_out,
  // Raw coincidence line before re-timing, for monitoring.
  output logic                       coinc_out
);
  timeunit 1ps; timeprecision 1ps;

  // One channel: input delay, optional shortener, for each of the 4 ends.
  for (genvar s = 0; s < N; s++) begin : g_strip
    logic [3:0] raw, dly, shaped;
    iodelay_tap_t tap [4];

    assign raw = {h2_r[s], h2_l[s], h1_r[s], h1_l[s]};
    assign tap[0] = tap_h1_l[s];
    assign tap[1] = tap_h1_r[s];
    assign tap[2] = tap_h2_l[s];
    assign tap[3] = tap_h2_r[s];

    for (genvar e = 0; e < 4; e++) begin : g_end
      input_delay u_idly (.din(raw[e]), .tap(tap[e]), .dout(dly[e]));
      if (SHORTEN) begin : g_short
        pulse_shortener u_short (.din(dly[e]), .dout(shaped[e]));
      end else begin : g_pass
        assign shaped[e] = dly[e];
      end
    end

    meantimer u_mt_h1 (.left(shaped[0]), .right(shaped[1]), .mt_out(mt_h1[s]));
    meantimer u_mt_h2 (.left(shaped[2]), .right(shaped[3]), .mt_out(mt_h2[s]));
  end

  coincidence_matrix #(.N(N)) u_matrix (
    .h1        (mt_h1),
    .h2        (mt_h2),
    .sel       (sel),
    .matrix_out(matrix_out),
    .h1h2_out  (h1h2_out),
    .h1_out    (h1_out),
    .h2_out    (h2_out),
    .coinc_out (coinc_out)
  );
endmodule
