// tb_cordic_exp: exp(x) against the simulator's real-valued $exp over x in [-11, 10.3],
// tolerance 2e-4 relative plus 3 LSB; also the saturation and underflow ends.
module tb_cordic_exp;
  import nms_pkg::*;
  fxp_t x, y;
  int checks = 0, failures = 0;
  cordic_exp dut (.x, .y);
  initial begin
    real xr, ref_v, got, tol;
    for (int n = 0; n < 3000; n++) begin
      xr = -11.0 + 21.3 * $urandom_range(0, 1000000) / 1000000.0;
      if (n < 5) xr = (n == 0) ? 0.0 : (n == 1) ? 1.0 : (n == 2) ? -1.0 : (n == 3) ? 0.6931 : 5.0;
      x = fxp_t'($rtoi(xr * 65536.0));
      #1;
      ref_v = $exp($itor(x) / 65536.0);
      got   = $itor(y) / 65536.0;
      tol   = ref_v * 2.0e-4 + 3.0 / 65536.0;
      checks++;
      if (got - ref_v > tol || ref_v - got > tol) begin
        failures++;
        if (failures < 8) $display("FAIL x=%f y=%f ref=%f", $itor(x)/65536.0, got, ref_v);
      end
    end
    x = 32'sh000B_0000; #1; checks++; if (y != 32'sh7FFFFFFF) begin failures++; $display("FAIL sat"); end
    x = -32'sh0010_0000; #1; checks++; if (y != 0) begin failures++; $display("FAIL underflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
