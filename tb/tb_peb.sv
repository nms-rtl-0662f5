// tb_peb: random micro-operation sequences on one PEB. A reference model kept here applies
// each operation's definition (integer Q16.16 arithmetic with saturation for the linear units,
// a real-valued reciprocal with a tolerance) and is re-synchronised to the element after every
// check. PF_LOG and PF_EXP must leave the destination alone.
module tb_peb;
  import nms_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  pe_uop_t u;
  fxp_t row_in, col_in, ib0, ib1, ob0, ob1;
  int checks = 0, failures = 0;
  int nrcp = 0;
  always #5 clk = ~clk;
  peb dut (.clk, .rst_n, .en, .uop(u), .row_in, .col_in, .ib0, .ib1, .ob0, .ob1);

  function automatic longint sat(longint v);
    if (v > 64'sd2147483647) return 64'sd2147483647;
    if (v < -64'sd2147483648) return -64'sd2147483648;
    return v;
  endfunction
  function automatic longint mulq(longint a, longint b);
    return sat((a * b) >>> 16);
  endfunction

  initial begin
    longint r [4]; longint A, B, cur, e; real er, tol; bit approx, keep;
    u = UOP_NOP; row_in = 0; col_in = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 4; k++) r[k] = 0;
    for (int n = 0; n < 3000; n++) begin
      u.func  = pe_func_e'($urandom_range(0, 10));
      u.src_a = pe_src_e'($urandom_range(0, 7));
      u.src_b = pe_src_e'($urandom_range(0, 7));
      u.dst   = pe_dst_e'($urandom_range(0, 3));
      u.shamt = 5'($urandom_range(0, 31));
      row_in  = $signed($urandom_range(0, 600000)) - 300000;
      col_in  = $signed($urandom_range(0, 600000)) - 300000;
      
      en = 1;
      A = (u.src_a == SRC_ROW) ? row_in : (u.src_a == SRC_COL) ? col_in : (u.src_a == SRC_ZERO) ? 0 :
          (u.src_a == SRC_ONE) ? 65536 : r[int'(u.src_a) - 2];
      B = (u.src_b == SRC_ROW) ? row_in : (u.src_b == SRC_COL) ? col_in : (u.src_b == SRC_ZERO) ? 0 :
          (u.src_b == SRC_ONE) ? 65536 : r[int'(u.src_b) - 2];
      cur = r[int'(u.dst)];
      approx = 0; keep = 0; tol = 0;
      case (u.func)
        PF_PASS: e = A;
        PF_ADD:  e = sat(A + B);
        PF_SUB:  e = sat(A - B);
        PF_MUL:  e = mulq(A, B);
        PF_MAC:  e = sat(cur + mulq(A, B));
        PF_SHR:  e = A >>> u.shamt;
        PF_DIV:  e = (B == 0) ? ((A < 0) ? -64'sd2147483648 : 64'sd2147483647) : sat((A * 65536) / B);
        PF_RECIP: begin
          nrcp++;
          if (A == 0) e = 64'sd2147483647;
          else begin
            approx = 1; er = 4294967296.0 / $itor(A);
            if (er > 2147483647.0) er = 2147483647.0;
            if (er < -2147483648.0) er = -2147483648.0;
            e = longint'(er); tol = ((er < 0) ? -er : er) * 1.0e-5 + 2;
          end
        end
        default: begin e = cur; keep = 1; end        // NOP, LOG, EXP
      endcase
      @(negedge clk);
      case (u.dst)
        DST_IB0: cur = ib0; DST_IB1: cur = ib1; DST_OB0: cur = ob0; default: cur = ob1;
      endcase
      checks++;
      if (approx ? ((cur - e > tol) || (e - cur > tol)) : (cur != e)) begin
        failures++;
        if (failures < 8) $display("FAIL n=%0d func=%0d A=%0d B=%0d got=%0d exp=%0d", n, u.func, A, B, cur, e);
      end
      r[0] = ib0; r[1] = ib1; r[2] = ob0; r[3] = ob1;
    end
    // en low: nothing changes
    en = 0; u = mk_uop(PF_ADD, SRC_ONE, SRC_ONE, DST_OB0); r[2] = ob0;
    @(negedge clk); checks++; if (ob0 != r[2]) begin failures++; $display("FAIL en"); end
    if (nrcp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
