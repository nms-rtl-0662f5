// tb_te: self-checking test of the tree element. Random operands for every operation; the
// expected c and c_i are computed here from the operation definitions (with saturation).
module tb_te;
  import nms_pkg::*;
  te_op_e op; fxp_t a, b, c; logic [31:0] ai, bi, ci;
  int checks = 0, failures = 0;
  te #(.PW(32)) dut (.op, .a, .b, .ai, .bi, .c, .ci);

  function automatic fxp_t sat(longint v);
    if (v > 64'sd2147483647) return 32'sh7FFFFFFF;
    if (v < -64'sd2147483648) return 32'sh80000000;
    return fxp_t'(v);
  endfunction

  initial begin
    fxp_t exp_c; logic [31:0] exp_ci;
    for (int n = 0; n < 4000; n++) begin
      op = te_op_e'(n % 4);
      a = (n % 7 == 0) ? 32'sh7FFF0000 : $signed($urandom);
      b = (n % 11 == 0) ? a : $signed($urandom);
      if (n % 5 == 0) begin a = a >>> 8; b = b >>> 8; end
      ai = $urandom; bi = $urandom;
      #1;
      case (op)
        TE_ADD:  exp_c = sat(longint'(a) + longint'(b));
        TE_SUB:  exp_c = sat(longint'(a) - longint'(b));
        TE_ABSD: exp_c = sat((longint'(a) > longint'(b)) ? longint'(a) - longint'(b) : longint'(b) - longint'(a));
        default: exp_c = (a < b || a == b) ? a : b;
      endcase
      exp_ci = (a > b) ? bi : ai;
      checks++;
      if (c !== exp_c || ci !== exp_ci) begin
        failures++;
        if (failures < 5) $display("FAIL op=%0d a=%0d b=%0d c=%0d exp=%0d ci=%h exp=%h", op, a, b, c, exp_c, ci, exp_ci);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
