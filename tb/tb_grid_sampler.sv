// tb_grid_sampler: gridding and per-cell_id sampling against a model kept here. Random points
// (some outside the grid on either side) stream in one per cycle with random numbers for the
// keep filter; cell_id and keep are compared with the model every cycle, no cell_id may keep more
// than quota points, the kept count must match, and clr must empty the counters. A second
// pass with the filter fully open checks that every occupied cell_id ends with min(points, quota).
module tb_grid_sampler;
  import nms_pkg::*;
  localparam int G = 16, GB = 4;
  logic clk = 0, rst_n = 0, clr = 0, valid = 0, keep;
  fxp_t x = 0, y = 0, x0, y0;
  logic [4:0] shift;
  logic [7:0] quota;
  logic [15:0] thr, rnd = 0;
  logic [2*GB-1:0] cell_id;
  logic [31:0] n_kept;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  grid_sampler #(.GRID(G), .CW(8)) dut (.*);

  int cnt [G*G], pts [G*G];
  function automatic int cidx(fxp_t v, fxp_t o);
    longint d; d = longint'(v) - longint'(o);
    if (d < 0) return 0;
    d = d >> shift;
    return (d >= G) ? G - 1 : int'(d);
  endfunction

  task automatic pass(int n, bit open);
    int kept, ec; bit ek;
    kept = 0;
    for (int k = 0; k < G * G; k++) begin cnt[k] = 0; pts[k] = 0; end
    clr = 1; @(negedge clk); clr = 0;
    checks++; if (n_kept != 0) failures++;
    for (int i = 0; i < n; i++) begin
      valid = 1;
      x = x0 + $signed($urandom_range(0, 20 << 16)) - (2 << 16);
      y = y0 + $signed($urandom_range(0, 20 << 16)) - (2 << 16);
      rnd = 16'($urandom); thr = open ? 16'hFFFF : 16'h8000;
      #1;
      ec = cidx(y, y0) * G + cidx(x, x0);
      ek = (rnd <= thr) && (cnt[ec] < quota);
      checks++;
      if (cell_id != (2*GB)'(ec) || keep != ek) begin failures++; if (failures < 5) $display("FAIL point %0d cell %0d/%0d keep %0d/%0d", i, cell_id, ec, keep, ek); end
      pts[ec]++;
      if (ek) begin cnt[ec]++; kept++; end
      @(negedge clk);
    end
    valid = 0;
    checks++; if (n_kept != 32'(kept)) begin failures++; $display("FAIL kept %0d exp %0d", n_kept, kept); end
    for (int k = 0; k < G * G; k++) begin
      checks++;
      if (dut.cnt_q[k] != 8'(cnt[k]) || cnt[k] > quota) failures++;
      if (open) begin checks++; if (cnt[k] != ((pts[k] < quota) ? pts[k] : quota)) failures++; end
    end
  endtask

  initial begin
    x0 = -32'sd3 <<< 16; y0 = 32'sd5 <<< 16; shift = 5'd16; quota = 8'd3;
    repeat (2) @(negedge clk); rst_n = 1;
    pass(2000, 0);
    pass(1500, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
