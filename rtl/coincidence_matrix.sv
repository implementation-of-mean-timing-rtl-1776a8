// coincidence_matrix -- N x N selectable coincidence matrix with equal timing.
//
// Every H1 channel i (columns) can be put in coincidence with every H2
// channel j (rows) by setting sel[i][j]. H1 signals climb their column, one
// hop a (A_PS) per row; H2 signals run along their row, one hop b (B_PS)
// per column. Before entering, H1 channel i is delayed by i*b and H2 channel
// j by j*a, so at pixel (i,j) both have been delayed by i*b + j*a: the two
// signals of every pair meet at the same time, whichever pair it is.
//
// Three OR lines collect the results, each built so that every channel
// reaches the output after the same total delay:
//   * H1-Output: top row of ORs, entered after one more a hop, chained by b;
//     every H1 channel arrives after N*a + (N-1)*b.
//   * H2-Output: right column of ORs, entered after one more b hop, chained
//     by a; every H2 channel arrives after N*b + (N-1)*a.
//   * Coincidence: each pixel ORs its AND into a line climbing its column
//     (hop a), the column lines are OR-ed along the top (hop b). It carries
//     only the fact that a selected pair fired.
// The trigger MATRIX-OUT is the coincidence line re-timed with H1-Output
// (AND of the two), so its edge comes from the H1 timing. (H1+H2)-OUT is
// the OR of H1-OUT and H2-OUT.
//
// What follows the original: the pixel, the a/b routing, the input
// compensation and the output lines. Model choices: equal hops (the
// original's come from routing), the coincidence line given the same hops
// as the H1 line beside it, re-timing as an AND, and (H1+H2) as an OR.
//
// Interface: h1, h2 are mean-timer outputs at the reference points; sel is
// static. Latency to h1_out and matrix_out: N*A_PS + (N-1)*B_PS.
module coincidence_matrix
  import mt_pkg::*;
#(
  parameter int unsigned N    = N_STRIPS,
  parameter int unsigned A_PS = MATRIX_A_PS,
  parameter int unsigned B_PS = MATRIX_B_PS
) (
  input  logic [N-1:0]        h1,
  input  logic [N-1:0]        h2,
  input  logic [N-1:0][N-1:0] sel,       // sel[i][j]: H1 channel i with H2 channel j
  output logic                matrix_out,
  output logic                h1h2_out,
  output logic                h1_out,
  output logic                h2_out,
  output logic                coinc_out
);
  timeunit 1ps; timeprecision 1ps;

  // Bundles: row j of H1 / coincidence signals entering (*_ri) and leaving
  // (*_ro) the pixels of that row, bit i = column i; column i of H2 signals
  // entering (h2_ci) and leaving (h2_co) its pixels, bit j = row j. All hops
  // between two rows (a) or two columns (b) are equal, so each set of them
  // is one delay bundle.
  logic [N-1:0] h1_ri [N], h1_ro [N], c_ri [N], c_ro [N];
  logic [N-1:0] h2_ci [N], h2_co [N];
  logic [N-1:0] h1_top, c_top, h2_right;
  // OR-line chains.
  logic h1_box [N], c_box [N], h2_box [N];

  // Input compensation: H1 channel i by i*b, H2 channel j by j*a.
  for (genvar k = 0; k < N; k++) begin : g_comp
    delay_cell #(.DELAY_PS(k * B_PS)) u_h1 (.a(h1[k]), .y(h1_ri[0][k]));
    delay_cell #(.DELAY_PS(k * A_PS)) u_h2 (.a(h2[k]), .y(h2_ci[0][k]));
  end
  assign c_ri[0] = '0;

  // Hops a between rows j-1 and j, hops b between columns i-1 and i.
  for (genvar k = 1; k < N; k++) begin : g_hop
    delay_cell #(.W(N), .DELAY_PS(A_PS)) u_h1_a (.a(h1_ro[k-1]), .y(h1_ri[k]));
    delay_cell #(.W(N), .DELAY_PS(A_PS)) u_c_a  (.a(c_ro[k-1]),  .y(c_ri[k]));
    delay_cell #(.W(N), .DELAY_PS(B_PS)) u_h2_b (.a(h2_co[k-1]), .y(h2_ci[k]));
  end

  for (genvar i = 0; i < N; i++) begin : g_col
    for (genvar j = 0; j < N; j++) begin : g_row
      matrix_element u_px (
        .h1_in    (h1_ri[j][i]),
        .h2_in    (h2_ci[i][j]),
        .sel      (sel[i][j]),
        .coinc_in (c_ri[j][i]),
        .h1_out   (h1_ro[j][i]),
        .h2_out   (h2_co[i][j]),
        .coinc_out(c_ro[j][i])
      );
    end
  end

  // Last hop out of the array: a into the top OR rows, b into the right OR column.
  delay_cell #(.W(N), .DELAY_PS(A_PS)) u_h1_top   (.a(h1_ro[N-1]), .y(h1_top));
  delay_cell #(.W(N), .DELAY_PS(A_PS)) u_c_top    (.a(c_ro[N-1]),  .y(c_top));
  delay_cell #(.W(N), .DELAY_PS(B_PS)) u_h2_right (.a(h2_co[N-1]), .y(h2_right));

  // OR chains: H1-Output and coincidence rows chained by b, H2-Output column by a.
  for (genvar k = 0; k < N; k++) begin : g_or
    if (k == 0) begin : g_first
      assign h1_box[k] = h1_top[k];
      assign c_box[k]  = c_top[k];
      assign h2_box[k] = h2_right[k];
    end else begin : g_chain
      logic h1_prev, c_prev, h2_prev;
      delay_cell #(.DELAY_PS(B_PS)) u_h1_b (.a(h1_box[k-1]), .y(h1_prev));
      delay_cell #(.DELAY_PS(B_PS)) u_c_b  (.a(c_box[k-1]),  .y(c_prev));
      delay_cell #(.DELAY_PS(A_PS)) u_h2_a (.a(h2_box[k-1]), .y(h2_prev));
      assign h1_box[k] = h1_top[k]   | h1_prev;
      assign c_box[k]  = c_top[k]    | c_prev;
      assign h2_box[k] = h2_right[k] | h2_prev;
    end
  end

  assign h1_out     = h1_box[N-1];
  assign h2_out     = h2_box[N-1];
  assign coinc_out  = c_box[N-1];
  assign matrix_out = coinc_out & h1_out;   // re-timing with the H1 output
  assign h1h2_out   = h1_out | h2_out;
endmodule
