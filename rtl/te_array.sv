// te_array: the TE array, GROUPS groups of 64 tree elements (paper: 8 groups of 64 TEs).
//
// All groups share the leaf and reduction operation codes and the accumulator controls;
// each group has its own operands and results, so the array compares or adds GROUPS vectors
// of 64 words at once, or folds GROUPS vectors to GROUPS scalars. See te_tree for one group.
// Sharing the operation codes across groups is this design's choice.
module te_array
  import nms_pkg::*;
#(
  parameter int unsigned GROUPS = 8,
  parameter int unsigned LEAVES = 32,
  parameter int unsigned PW     = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  te_op_e leaf_op,
  input  te_op_e red_op,
  input  fxp_t [GROUPS-1:0][LEAVES-1:0]         a,
  input  fxp_t [GROUPS-1:0][LEAVES-1:0]         b,
  input  logic [GROUPS-1:0][LEAVES-1:0][PW-1:0] ai,
  input  logic [GROUPS-1:0][LEAVES-1:0][PW-1:0] bi,
  output fxp_t [GROUPS-1:0][LEAVES-1:0]         leaf_c,
  output logic [GROUPS-1:0][LEAVES-1:0][PW-1:0] leaf_ci,
  output fxp_t [GROUPS-1:0]                     root_c,
  output logic [GROUPS-1:0][PW-1:0]             root_ci,
  input  logic acc_clr,
  input  logic acc_en,
  output fxp_t [GROUPS-1:0]                     acc_c,
  output logic [GROUPS-1:0][PW-1:0]             acc_ci
);
  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    te_tree #(.LEAVES(LEAVES), .PW(PW)) u_grp (
      .clk, .rst_n, .leaf_op, .red_op,
      .a(a[g]), .b(b[g]), .ai(ai[g]), .bi(bi[g]),
      .leaf_c(leaf_c[g]), .leaf_ci(leaf_ci[g]),
      .root_c(root_c[g]), .root_ci(root_ci[g]),
      .acc_clr, .acc_en, .acc_c(acc_c[g]), .acc_ci(acc_ci[g])
    );
  end
endmodule
