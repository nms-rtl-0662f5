// tb_te_tree: test of one 64-TE group: element-wise leaf results, the tree sum, the tree
// minimum with its payload, and the accumulating TE over several cycles (sum and minimum).
module tb_te_tree;
  import nms_pkg::*;
  localparam int L = 32;
  logic clk = 0, rst_n = 0;
  te_op_e leaf_op, red_op;
  fxp_t [L-1:0] a, b, leaf_c;
  logic [L-1:0][31:0] ai, bi, leaf_ci;
  fxp_t root_c, acc_c; logic [31:0] root_ci, acc_ci;
  logic acc_clr = 0, acc_en = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  te_tree #(.LEAVES(L), .PW(32)) dut (.clk, .rst_n, .leaf_op, .red_op, .a, .b, .ai, .bi,
    .leaf_c, .leaf_ci, .root_c, .root_ci, .acc_clr, .acc_en, .acc_c, .acc_ci);

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got=%0d exp=%0d", what, got, exp); end
  endtask

  initial begin
    longint sum, accsum; fxp_t mn; logic [31:0] mni; fxp_t accmn; logic [31:0] accmni;
    repeat (2) @(negedge clk); rst_n = 1;
    // tree sum of |a-b| and accumulation over 4 vectors
    leaf_op = TE_ABSD; red_op = TE_ADD;
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    accsum = 0;
    for (int v = 0; v < 4; v++) begin
      sum = 0;
      for (int k = 0; k < L; k++) begin
        a[k] = $signed($urandom_range(0, 2000000)) - 1000000;
        b[k] = $signed($urandom_range(0, 2000000)) - 1000000;
        ai[k] = k; bi[k] = 100 + k;
      end
      #1;
      for (int k = 0; k < L; k++) begin
        longint d; d = (a[k] > b[k]) ? a[k] - b[k] : b[k] - a[k];
        chk("leaf absd", leaf_c[k], d); sum += d;
      end
      chk("root sum", root_c, sum);
      accsum += sum;
      acc_en = 1; @(negedge clk); acc_en = 0;
      chk("acc sum", acc_c, accsum);
    end
    // minimum with payload, accumulated over 3 vectors
    leaf_op = TE_MIN; red_op = TE_MIN;
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    chk("acc min cleared", acc_c, 32'sh7FFFFFFF);
    accmn = 32'sh7FFFFFFF; accmni = 0;
    for (int v = 0; v < 3; v++) begin
      mn = 32'sh7FFFFFFF; mni = 0;
      for (int k = 0; k < L; k++) begin
        a[k] = $signed($urandom_range(0, 100000)) + v * 50000; b[k] = 32'sh7FFFFFFF;
        ai[k] = 1000 * v + k; bi[k] = 'hDEAD;
      end
      a[$urandom_range(0, L-1)] = 5 + v;   // a unique small value
      #1;
      for (int k = 0; k < L; k++) if (a[k] < mn) begin mn = a[k]; mni = ai[k]; end
      for (int k = 0; k < L; k++) chk("leaf min payload", leaf_ci[k], ai[k]);
      chk("root min", root_c, mn); chk("root min payload", root_ci, mni);
      if (mn < accmn) begin accmn = mn; accmni = mni; end
      acc_en = 1; @(negedge clk); acc_en = 0;
      chk("acc min", acc_c, accmn); chk("acc min payload", acc_ci, accmni);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
