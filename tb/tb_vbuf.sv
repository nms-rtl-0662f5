// tb_vbuf: the 64 B buffer: both lines written and read back, reset to zero, a written line
// readable in the next cycle and the other line untouched.
module tb_vbuf;
  import nms_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, waddr = 0, raddr = 0;
  line_t wdata = '0, rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vbuf #(.LINES(2)) dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata);
  initial begin
    line_t m [2];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int l = 0; l < 2; l++) begin raddr = l[0]; #1; checks++; if (rdata != '0) failures++; m[l] = '0; end
    for (int n = 0; n < 200; n++) begin
      int l; l = $urandom_range(0, 1);
      for (int k = 0; k < 8; k++) wdata[k] = $signed($urandom);
      we = 1; waddr = l[0]; @(negedge clk); we = 0; m[l] = wdata;
      for (int r = 0; r < 2; r++) begin
        raddr = r[0]; #1; checks++;
        if (rdata != m[r]) begin failures++; if (failures < 5) $display("FAIL line %0d", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
