// tb_fxp_div: a/b in Q16.16 against 64-bit integer division computed here, with saturation
// and division by zero.
module tb_fxp_div;
  import nms_pkg::*;
  fxp_t a, b, q;
  int checks = 0, failures = 0;
  fxp_div dut (.a, .b, .q);
  initial begin
    longint e;
    for (int n = 0; n < 3000; n++) begin
      a = $signed($urandom) >>> $urandom_range(0, 20);
      b = $signed($urandom) >>> $urandom_range(0, 28);
      if (n % 50 == 0) b = 0;
      #1;
      if (b == 0) e = a[31] ? -64'sd2147483648 : 64'sd2147483647;
      else begin
        e = (longint'(a) * 65536) / longint'(b);
        if (e > 64'sd2147483647) e = 64'sd2147483647;
        if (e < -64'sd2147483648) e = -64'sd2147483648;
      end
      checks++;
      if (longint'(q) != e) begin failures++; if (failures < 8) $display("FAIL a=%0d b=%0d q=%0d e=%0d", a, b, q, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
