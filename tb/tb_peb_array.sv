// tb_peb_array: the 8x8 PEB array computing the Student-t kernel (1 + d)^-1. Eight random
// distance lines are loaded one per row through the column port with row masking, then
// IB0 = IB0 + 1 and OB0 = 1/IB0 run on all elements; every element is compared with
// 1/(1 + d) computed here (tolerance 1e-5 relative + 2 LSB).
module tb_peb_array;
  import nms_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  pe_uop_t uop;
  logic [7:0] row_en;
  fxp_t [7:0] row_in, col_in, rd_data;
  logic [2:0] rd_row = 0; logic rd_ob1 = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  peb_array dut (.clk, .rst_n, .en, .uop, .row_en, .row_in, .col_in, .rd_row, .rd_ob1, .rd_data);
  task automatic issue(pe_uop_t u);
    uop = u; en = 1; @(negedge clk); en = 0;
  endtask
  initial begin
    fxp_t d [8][8]; real r, got;
    uop = UOP_NOP; row_en = '1; row_in = '0; col_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      for (int m = 0; m < 8; m++) begin d[n][m] = $urandom_range(0, 50 * 65536); col_in[m] = d[n][m]; end
      row_en = 8'(1) << n;
      issue(mk_uop(PF_PASS, SRC_COL, SRC_ZERO, DST_IB0));
    end
    row_en = '1;
    issue(mk_uop(PF_ADD, SRC_IB0, SRC_ONE, DST_IB0));
    issue(mk_uop(PF_RECIP, SRC_IB0, SRC_ZERO, DST_OB0));
    for (int n = 0; n < 8; n++) begin
      rd_row = 3'(n); #1;
      for (int m = 0; m < 8; m++) begin
        r = 1.0 / (1.0 + $itor(d[n][m]) / 65536.0);
        got = $itor(rd_data[m]) / 65536.0;
        checks++;
        if (got - r > r * 1e-5 + 3e-5 || r - got > r * 1e-5 + 3e-5) begin
          failures++; if (failures < 6) $display("FAIL q[%0d][%0d]=%f exp %f", n, m, got, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
