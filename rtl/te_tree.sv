// te_tree: one group of 64 tree elements (TEs) of the TE array.
//
// The paper gives each group 64 TEs drawn as a binary add/compare tree whose every level also
// sends its results out. This design arranges the 64 as
//   * 32 leaf TEs working element-wise on (a[k], b[k], ai[k], bi[k]) under leaf_op; their
//     results leaf_c/leaf_ci are outputs, which is how the DE steps use 32 (or 4) TEs in parallel;
//   * a 31-TE reduction tree (16+8+4+2+1) folding the 32 leaf results under red_op
//     (TE_ADD gives the sum, TE_MIN the minimum together with its payload);
//   * one accumulating TE that folds the tree root into a register across cycles:
//     acc <= TE(red_op, root, acc) when acc_en. acc_clr loads 0 (TE_ADD) or the largest value
//     (TE_MIN) so a following accumulation starts clean.
// The split 32 + 31 + 1 = 64 is this design's reading of "64 TEs" per group.
// Leaf and tree are combinational; the accumulator updates on the clock edge.
module te_tree
  import nms_pkg::*;
#(
  parameter int unsigned LEAVES = 32,   // power of two
  parameter int unsigned PW     = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  te_op_e                    leaf_op,
  input  te_op_e                    red_op,
  input  fxp_t   [LEAVES-1:0]       a,
  input  fxp_t   [LEAVES-1:0]       b,
  input  logic   [LEAVES-1:0][PW-1:0] ai,
  input  logic   [LEAVES-1:0][PW-1:0] bi,
  output fxp_t   [LEAVES-1:0]       leaf_c,
  output logic   [LEAVES-1:0][PW-1:0] leaf_ci,
  output fxp_t                      root_c,
  output logic   [PW-1:0]           root_ci,
  input  logic                      acc_clr,
  input  logic                      acc_en,
  output fxp_t                      acc_c,
  output logic   [PW-1:0]           acc_ci
);
  localparam int unsigned NODES = 2 * LEAVES - 1;   // heap: node 0 root, leaves LEAVES-1 .. 2L-2

  fxp_t              nc  [NODES];
  logic [PW-1:0]     nci [NODES];

  // leaf TEs
  for (genvar k = 0; k < LEAVES; k++) begin : g_leaf
    te #(.PW(PW)) u_te (
      .op(leaf_op), .a(a[k]), .b(b[k]), .ai(ai[k]), .bi(bi[k]),
      .c(leaf_c[k]), .ci(leaf_ci[k])
    );
    assign nc [LEAVES-1+k] = leaf_c[k];
    assign nci[LEAVES-1+k] = leaf_ci[k];
  end

  // reduction TEs
  for (genvar n = 0; n < LEAVES - 1; n++) begin : g_node
    te #(.PW(PW)) u_te (
      .op(red_op), .a(nc[2*n+1]), .b(nc[2*n+2]), .ai(nci[2*n+1]), .bi(nci[2*n+2]),
      .c(nc[n]), .ci(nci[n])
    );
  end

  assign root_c  = nc[0];
  assign root_ci = nci[0];

  // accumulating TE
  fxp_t          acc_q,  acc_d;
  logic [PW-1:0] acci_q, acci_d;

  te #(.PW(PW)) u_acc (
    .op(red_op), .a(root_c), .b(acc_q), .ai(root_ci), .bi(acci_q), .c(acc_d), .ci(acci_d)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q  <= '0;
      acci_q <= '0;
    end else if (acc_clr) begin
      acc_q  <= (red_op == TE_MIN) ? FXP_MAX : '0;
      acci_q <= '0;
    end else if (acc_en) begin
      acc_q  <= acc_d;
      acci_q <= acci_d;
    end
  end

  assign acc_c  = acc_q;
  assign acc_ci = acci_q;
endmodule
