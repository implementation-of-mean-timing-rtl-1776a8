// or_cascade -- OR of many signals as a balanced tree of 2-input ORs.
//
// A LUT has only six inputs, so the OR of the 54 AND outputs of a mean-timer
// is built as a cascade. The original uses 6 levels of 2-to-1 ORs kept in one
// CLB column, chosen so that all paths of a level have nearly equal delay
// (at most 34 ps apart). Here every path crosses exactly LEVELS gates and
// each level adds LEVEL_PS (a model value: the original gives no absolute
// delay). Leaves beyond N_IN are tied low.
//
// Interface: dout = |din, LEVELS*LEVEL_PS after din. Pulses shorter than
// LEVEL_PS pass unchanged (transport delay).
module or_cascade
  import mt_pkg::*;
#(
  parameter int unsigned N_IN     = TDL_TAPS,
  parameter int unsigned LEVELS   = OR_LEVELS,
  parameter int unsigned LEVEL_PS = OR_LEVEL_PS
) (
  input  logic [N_IN-1:0] din,
  output logic            dout
);
  timeunit 1ps; timeprecision 1ps;

  localparam int unsigned LEAVES = 1 << LEVELS;

  // node[l] holds the 2^(LEVELS-l) signals entering level l; node[LEVELS][0] is the root.
  logic [LEAVES-1:0] node [LEVELS+1];

  initial assert (N_IN <= LEAVES) else $error("or_cascade: %0d inputs need more than %0d levels", N_IN, LEVELS);

  assign node[0] = LEAVES'(din);

  for (genvar l = 0; l < LEVELS; l++) begin : g_level
    localparam int unsigned N_OUT = LEAVES >> (l + 1);
    logic [N_OUT-1:0] sum;
    always_comb begin
      for (int g = 0; g < N_OUT; g++) sum[g] = node[l][2*g] | node[l][2*g+1];
    end
    // The N_OUT gates of one level have equal delay: one bundle per level.
    delay_cell #(.W(N_OUT), .DELAY_PS(LEVEL_PS)) u_lvl (.a(sum), .y(node[l+1][N_OUT-1:0]));
    if (N_OUT < LEAVES) begin : g_pad
      assign node[l+1][LEAVES-1:N_OUT] = '0;
    end
  end

  assign dout = node[LEVELS][0];
endmodule
