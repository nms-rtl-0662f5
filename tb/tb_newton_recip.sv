// tb_newton_recip: 1/x against real division for positive and negative x over the Q16.16
// range, tolerance 1e-5 relative plus 2 LSB; also x = 0.
module tb_newton_recip;
  import nms_pkg::*;
  fxp_t x, y;
  int checks = 0, failures = 0;
  newton_recip #(.ITERS(3)) dut (.x, .y);
  initial begin
    real ref_v, got, tol;
    for (int n = 0; n < 3000; n++) begin
      int sh;
      sh = $urandom_range(1, 30);
      x = fxp_t'(($urandom >> sh) | 1);
      if (x <= 16) x = 17;
      if (n % 3 == 0) x = -x;
      if (n == 1) x = 32'sh0001_0000;
      #1;
      ref_v = 65536.0 / $itor(x);
      got   = $itor(y) / 65536.0;
      tol   = ((ref_v < 0) ? -ref_v : ref_v) * 1.0e-5 + 2.0 / 65536.0;
      checks++;
      if (got - ref_v > tol || ref_v - got > tol) begin
        failures++;
        if (failures < 8) $display("FAIL x=%f y=%f ref=%f", $itor(x)/65536.0, got, ref_v);
      end
    end
    x = 0; #1; checks++; if (y != 32'sh7FFFFFFF) begin failures++; $display("FAIL zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
