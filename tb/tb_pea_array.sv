// tb_pea_array: the 8x8 PEA array running the distance dataflow. For K random features it
// issues OB0 += row*col, OB1 += row*row, IB1 += col*col per feature, then the three finishing
// operations, and reads the 8 rows back; every element must hold the squared distance
// between row sample n and column sample m computed here with the same fixed-point steps.
// It also checks row masking (row_en), the OB1 read port and the cycle count (3 per feature).
module tb_pea_array;
  import nms_pkg::*;
  localparam int K = 6;
  logic clk = 0, rst_n = 0, en = 0;
  pe_uop_t uop;
  logic [7:0] row_en;
  fxp_t [7:0] row_in, col_in, rd_data;
  logic [2:0] rd_row = 0; logic rd_ob1 = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  pea_array dut (.clk, .rst_n, .en, .uop, .row_en, .row_in, .col_in, .rd_row, .rd_ob1, .rd_data);

  function automatic longint mq(longint a, longint b); return (a * b) >>> 16; endfunction

  // operations are issued at the falling edge and take effect at the next rising edge
  task automatic issue(pe_uop_t u);
    uop = u; en = 1; @(negedge clk); en = 0;
  endtask

  initial begin
    fxp_t xa [8][K]; fxp_t xb [8][K];
    longint dot, na, nb, e;
    int cyc0, cyc1;
    uop = UOP_NOP; row_en = '1; row_in = '0; col_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 8; n++) for (int k = 0; k < K; k++) begin
      xa[n][k] = $urandom_range(0, 65536); xb[n][k] = $urandom_range(0, 65536);
    end
    issue(mk_uop(PF_PASS, SRC_ZERO, SRC_ZERO, DST_OB0));
    issue(mk_uop(PF_PASS, SRC_ZERO, SRC_ZERO, DST_OB1));
    issue(mk_uop(PF_PASS, SRC_ZERO, SRC_ZERO, DST_IB1));
    cyc0 = $time / 10;
    for (int k = 0; k < K; k++) begin
      for (int n = 0; n < 8; n++) begin row_in[n] = xa[n][k]; col_in[n] = xb[n][k]; end
      issue(mk_uop(PF_MAC, SRC_ROW, SRC_COL, DST_OB0));
      issue(mk_uop(PF_MAC, SRC_ROW, SRC_ROW, DST_OB1));
      issue(mk_uop(PF_MAC, SRC_COL, SRC_COL, DST_IB1));
    end
    cyc1 = $time / 10;
    checks++; if (cyc1 - cyc0 != 3 * K) begin failures++; $display("FAIL cycles %0d", cyc1 - cyc0); end
    issue(mk_uop(PF_ADD, SRC_OB1, SRC_IB1, DST_OB1));
    // OB1 now holds ||a_n||^2 + ||b_m||^2: check through the OB1 read port
    rd_ob1 = 1;
    for (int n = 0; n < 8; n++) begin
      rd_row = 3'(n); #1;
      for (int m = 0; m < 8; m++) begin
        na = 0; nb = 0;
        for (int k = 0; k < K; k++) begin na += mq(xa[n][k], xa[n][k]); nb += mq(xb[m][k], xb[m][k]); end
        checks++; if (rd_data[m] != na + nb) begin failures++; $display("FAIL norms %0d %0d", n, m); end
      end
    end
    rd_ob1 = 0; @(negedge clk);
    issue(mk_uop(PF_ADD, SRC_OB0, SRC_OB0, DST_IB0));
    issue(mk_uop(PF_SUB, SRC_OB1, SRC_IB0, DST_OB0));
    for (int n = 0; n < 8; n++) begin
      rd_row = 3'(n); #1;
      for (int m = 0; m < 8; m++) begin
        dot = 0; na = 0; nb = 0;
        for (int k = 0; k < K; k++) begin
          dot += mq(xa[n][k], xb[m][k]); na += mq(xa[n][k], xa[n][k]); nb += mq(xb[m][k], xb[m][k]);
        end
        e = na + nb - 2 * dot;
        checks++;
        if (rd_data[m] != e) begin failures++; if (failures < 6) $display("FAIL d[%0d][%0d]=%0d exp %0d", n, m, rd_data[m], e); end
      end
    end
    @(negedge clk);
    // row mask: only row 5 loads the column operand
    row_en = 8'b0010_0000;
    for (int m = 0; m < 8; m++) col_in[m] = 1000 + m;
    issue(mk_uop(PF_PASS, SRC_COL, SRC_ZERO, DST_OB0));
    row_en = '1;
    for (int n = 0; n < 8; n++) begin
      rd_row = 3'(n); #1;
      for (int m = 0; m < 8; m++) begin
        checks++;
        if ((n == 5) != (rd_data[m] == 1000 + m)) begin failures++; $display("FAIL mask %0d %0d", n, m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
