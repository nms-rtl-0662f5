// tb_nms_sram: the 16 KB line buffer at its full size: random line writes, then reads that
// must return the written line exactly one cycle after the request; reads hold their data
// while the buffer is idle.
module tb_nms_sram;
  localparam int D = 512, W = 256;
  logic clk = 0, en = 0, we = 0;
  logic [8:0] addr = 0;
  logic [W-1:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  nms_sram #(.DEPTH(D), .LINE_W(W)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  logic [W-1:0] model [D];
  initial begin
    for (int a = 0; a < D; a++) begin
      for (int k = 0; k < W / 32; k++) model[a][32*k +: 32] = $urandom;
      en = 1; we = 1; addr = 9'(a); wdata = model[a]; @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 1000; n++) begin
      int a; a = $urandom_range(0, D - 1);
      en = 1; addr = 9'(a); @(negedge clk);
      en = 0; addr = 9'($urandom);
      checks++; if (rdata !== model[a]) begin failures++; if (failures < 5) $display("FAIL read %0d", a); end
      @(negedge clk);
      checks++; if (rdata !== model[a]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
