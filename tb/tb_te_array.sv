// tb_te_array: the 8-group TE array. Every group gets its own vectors; the test checks each
// group's tree sum and accumulated sum, so a swapped or missing group is seen.
module tb_te_array;
  import nms_pkg::*;
  localparam int G = 8, L = 32;
  logic clk = 0, rst_n = 0;
  te_op_e leaf_op = TE_ADD, red_op = TE_ADD;
  fxp_t [G-1:0][L-1:0] a, b, leaf_c;
  logic [G-1:0][L-1:0][31:0] ai, bi, leaf_ci;
  fxp_t [G-1:0] root_c, acc_c; logic [G-1:0][31:0] root_ci, acc_ci;
  logic acc_clr = 0, acc_en = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  te_array #(.GROUPS(G), .LEAVES(L), .PW(32)) dut (.clk, .rst_n, .leaf_op, .red_op, .a, .b, .ai, .bi,
    .leaf_c, .leaf_ci, .root_c, .root_ci, .acc_clr, .acc_en, .acc_c, .acc_ci);
  initial begin
    longint s [G]; longint acc [G];
    ai = '0; bi = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    for (int g = 0; g < G; g++) acc[g] = 0;
    for (int v = 0; v < 3; v++) begin
      for (int g = 0; g < G; g++) begin
        s[g] = 0;
        for (int k = 0; k < L; k++) begin
          a[g][k] = $signed($urandom_range(0, 200000)) - 100000 + g;
          b[g][k] = $signed($urandom_range(0, 200000)) - 100000;
          s[g] += longint'(a[g][k]) + longint'(b[g][k]);
        end
        acc[g] += s[g];
      end
      #1;
      for (int g = 0; g < G; g++) begin
        checks++; if (root_c[g] != s[g]) begin failures++; $display("FAIL group %0d root", g); end
      end
      acc_en = 1; @(negedge clk); acc_en = 0;
      for (int g = 0; g < G; g++) begin
        checks++; if (acc_c[g] != acc[g]) begin failures++; $display("FAIL group %0d acc", g); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
