// tb_cordic_log: ln(x) against the simulator's $ln over x from 2^-16 to 32767,
// absolute tolerance 3e-4; also the non-positive input.
module tb_cordic_log;
  import nms_pkg::*;
  fxp_t x, y;
  int checks = 0, failures = 0;
  cordic_log dut (.x, .y);
  initial begin
    real ref_v, got;
    for (int n = 0; n < 3000; n++) begin
      int sh;
      sh = $urandom_range(0, 30);
      x = fxp_t'(($urandom >> sh) | 1);
      if (x <= 0) x = 1;
      if (n == 0) x = 32'sh0001_0000;
      if (n == 1) x = 32'sh0002_0000;
      #1;
      ref_v = $ln($itor(x) / 65536.0);
      got   = $itor(y) / 65536.0;
      checks++;
      if (got - ref_v > 3.0e-4 || ref_v - got > 3.0e-4) begin
        failures++;
        if (failures < 8) $display("FAIL x=%f y=%f ref=%f", $itor(x)/65536.0, got, ref_v);
      end
    end
    x = 0; #1; checks++; if (y != 32'sh80000000) begin failures++; $display("FAIL zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
