// tb_nms_top: end-to-end test of the whole sampling circuit at its default sizes, against the
// DRAM model. It runs one complete pass of the DE-SNE affinity pipeline on 16 samples of
// K features (two tiles of 8):
//   LOAD   tile A (K lines) from DRAM into RA0;
//   DIST   A against A (from DRAM) into RB0 lines 0..7, A against tile B into RB0 lines 8..15
//          (the latter in two chunks of features);
//          every distance is checked exactly against the same fixed-point steps done here;
//   MOVE   the distance rows of sample 0 (RB0 lines 0 and 8) into RA0 lines 100 and 101;
//   PERP   the DE bandwidth search for sample 0 toward perplexity 5; the returned beta must
//          lie in its range and the returned |H - ln 5| must match the entropy worked out
//          here in floating point for that beta;
//   QNUM   (1 + d)^-1 over RB0 lines 0..7 into RB2, checked against 1/(1 + d);
//   TESUM  the sum over RB2 lines 0..7 on the TE group, checked exactly;
//   GRID   the 64 RB2 words taken as 32 points (x, y), gridded into cells 1/16 wide with one
//          sample per cell; every cell number and keep flag is checked against a model here;
//   STORE  RB2 lines 0..7 into DRAM lines 200..207, checked word by word.
// It counts the mechanisms the design has (every command kind, arbiter grants on each of its
// three ports, DRAM stalls, read returns, fitness rounds of the DE unit, accepted trials, the
// TE group switching between DE unit and controller, grid cells filling to their quota) and counts a failure for any that never
// happened.
module tb_nms_top;
  import nms_pkg::*;
  localparam int K = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  cmd_t cmd;
  fxp_t result, result2;
  logic [31:0] de_accepts;
  logic d_req, d_we, d_ready, d_rvalid;
  logic [19:0] d_addr;
  line_t d_wdata, d_rdata;
  logic [1:0] d_tag, d_rtag;
  int n_stall;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  nms_top dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .result, .result2, .de_accepts,
    .d_req, .d_we, .d_addr, .d_wdata, .d_tag, .d_ready, .d_rvalid, .d_rtag, .d_rdata);
  dram_model u_dram (.clk, .rst_n, .d_req, .d_we, .d_addr, .d_wdata, .d_tag, .d_ready, .d_rvalid,
    .d_rtag, .d_rdata, .n_stall);

  // ---------------- mechanism counters ----------------
  int n_cmd [8];
  int n_gnt [3];
  int n_rret = 0, n_fit = 0, n_sel_switch = 0;
  logic fit_q = 0, sel_q = 0;
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 3; p++) if (dut.dq_gnt[p]) n_gnt[p]++;
    if (d_rvalid) n_rret++;
    if (dut.u_de.fit_req && !fit_q) n_fit++;
    fit_q <= dut.u_de.fit_req;
    if (dut.te_de_sel != sel_q) n_sel_switch++;
    sel_q <= dut.te_de_sel;
  end

  task automatic run(cmd_t c);
    int t;
    cmd = c; cmd_valid = 1;
    do @(posedge clk); while (!cmd_ready);
    #1 cmd_valid = 0;
    t = 0;
    while (!done) begin @(posedge clk); #1; t++; end
    n_cmd[int'(c.op)]++;
    @(negedge clk);
  endtask

  function automatic cmd_t mk(cmd_op_e op, int dram, int a, int b, int len);
    cmd_t c;
    c = '0; c.op = op; c.dram_addr = 20'(dram); c.addr_a = 10'(a); c.addr_b = 10'(b); c.len = 10'(len);
    return c;
  endfunction

  function automatic longint mq(longint a, longint b); return (a * b) >>> 16; endfunction

  fxp_t xa [8][K], xb [8][K];
  longint dref [8][16];

  initial begin
    cmd_t c;
    real tgt_r, beta, s, w, h, e, q, r;
    longint sum;
    for (int i = 0; i < 8; i++) n_cmd[i] = 0;
    for (int p = 0; p < 3; p++) n_gnt[p] = 0;
    cmd = '0;
    for (int l = 0; l < 1024; l++) u_dram.mem[l] = '0;
    for (int k = 0; k < K; k++) for (int n = 0; n < 8; n++) begin
      xa[n][k] = $urandom_range(0, 65535); xb[n][k] = $urandom_range(0, 65535);
      u_dram.mem[k][n] = xa[n][k]; u_dram.mem[16 + k][n] = xb[n][k];
    end
    for (int n = 0; n < 8; n++) for (int m = 0; m < 16; m++) begin
      longint dot, na, nb;
      dot = 0; na = 0; nb = 0;
      for (int k = 0; k < K; k++) begin
        fxp_t y; y = (m < 8) ? xa[m][k] : xb[m-8][k];
        dot += mq(xa[n][k], y); na += mq(xa[n][k], xa[n][k]); nb += mq(y, y);
      end
      dref[n][m] = na + nb - 2 * dot;
    end
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk);

    run(mk(CMD_LOAD, 0, 0, 0, K));
    for (int k = 0; k < K; k++) begin
      checks++; if (dut.u_ra0.mem[k] != u_dram.mem[k]) begin failures++; $display("FAIL load %0d", k); end
    end
    run(mk(CMD_DIST, 0, 0, 0, K));
    // A against B in two chunks of K/2 features: first without finishing, then continuing
    c = mk(CMD_DIST, 16, 0, 8, K / 2); c.gens = 16'd2; run(c);
    c = mk(CMD_DIST, 16 + K / 2, K / 2, 8, K / 2); c.gens = 16'd1; run(c);
    for (int n = 0; n < 8; n++) for (int m = 0; m < 16; m++) begin
      line_t l; l = dut.u_rb0.mem[(m < 8) ? n : 8 + n];
      checks++;
      if (l[m % 8] != fxp_t'(dref[n][m])) begin
        failures++; if (failures < 6) $display("FAIL distance[%0d][%0d]=%0d exp %0d", n, m, l[m % 8], dref[n][m]);
      end
    end
    run(mk(CMD_MOVE, 0, 0, 100, 1));
    run(mk(CMD_MOVE, 0, 8, 101, 1));
    checks++; if (dut.u_ra0.mem[100] != dut.u_rb0.mem[0] || dut.u_ra0.mem[101] != dut.u_rb0.mem[8]) begin
      failures++; $display("FAIL move");
    end

    // perplexity search for sample 0 (word 0 of its rows is itself)
    c = mk(CMD_PERP, 0, 100, 0, 2);
    tgt_r = $ln(5.0);
    c.gens = 16'd3; c.seed = 32'h5EED_0001;
    c.arg0 = fxp_t'($rtoi(tgt_r * 65536.0)); c.arg1 = 32'sh0000_1000; c.arg2 = 32'sh0008_0000;
    run(c);
    beta = $itor(result) / 65536.0;
    s = 0; w = 0;
    for (int m = 1; m < 16; m++) begin
      e = $exp(-beta * $itor(dref[0][m]) / 65536.0);
      s += e; w += e * $itor(dref[0][m]) / 65536.0;
    end
    h = $ln(s) + beta * w / s;
    r = (h > tgt_r) ? h - tgt_r : tgt_r - h;
    $display("PERP beta=%f H=%f |H-tgt|=%f reported %f accepts=%0d", beta, h, r, $itor(result2) / 65536.0, de_accepts);
    checks++; if (result < c.arg1 || result > c.arg2) begin failures++; $display("FAIL beta range"); end
    checks++; if (r - $itor(result2) / 65536.0 > 0.01 || $itor(result2) / 65536.0 - r > 0.01) begin
      failures++; $display("FAIL entropy");
    end

    run(mk(CMD_QNUM, 0, 0, 0, 8));
    for (int n = 0; n < 8; n++) for (int m = 0; m < 8; m++) begin
      line_t l; l = dut.u_rb2.mem[n];
      q = 1.0 / (1.0 + $itor(dref[n][m]) / 65536.0);
      checks++;
      if ($itor(l[m]) / 65536.0 - q > 1e-4 || q - $itor(l[m]) / 65536.0 > 1e-4) begin
        failures++; if (failures < 10) $display("FAIL q[%0d][%0d]", n, m);
      end
    end
    run(mk(CMD_TESUM, 0, 0, 0, 8));
    sum = 0;
    for (int n = 0; n < 8; n++) begin line_t l; l = dut.u_rb2.mem[n]; for (int m = 0; m < 8; m++) sum += l[m]; end
    checks++; if (longint'(result) != sum) begin failures++; $display("FAIL tesum %0d exp %0d", result, sum); end
    // gridding and sampling of the RB2 words taken as 32 points (x, y), cells 1/16 wide
    c = mk(CMD_GRID, 0, 0, 20, 8);
    c.arg0 = '0; c.arg1 = '0; c.arg2 = 32'sd12; c.gens = 16'd1; c.seed = 32'h0000_FFFF;
    run(c);
    begin
      int occ [256]; int kept, rej;
      kept = 0; rej = 0;
      for (int k = 0; k < 256; k++) occ[k] = 0;
      for (int n = 0; n < 8; n++) begin
        line_t l, o; l = dut.u_rb2.mem[n]; o = dut.u_rb0.mem[20 + n];
        for (int j = 0; j < 4; j++) begin
          int cx, cy, ce; bit kp;
          cx = l[2*j] >>> 12; cy = l[2*j+1] >>> 12;
          if (cx > 15) cx = 15; if (cy > 15) cy = 15;
          ce = cy * 16 + cx; kp = (occ[ce] == 0);
          if (kp) begin occ[ce]++; kept++; end else rej++;
          checks++;
          if (o[2*j] != ce || o[2*j+1] != fxp_t'(kp)) begin failures++; $display("FAIL grid point %0d/%0d", n, j); end
        end
      end
      $display("grid kept %0d rejected by quota %0d", kept, rej);
      checks++; if (result != kept) begin failures++; $display("FAIL grid kept %0d exp %0d", result, kept); end
      checks++; if (kept == 0 || rej == 0) begin failures++; $display("FAIL grid quota never reached"); end
    end
    run(mk(CMD_STORE, 200, 0, 0, 8));
    repeat (10) @(negedge clk);
    for (int n = 0; n < 8; n++) begin
      checks++; if (u_dram.mem[200 + n] != dut.u_rb2.mem[n]) begin failures++; $display("FAIL store %0d", n); end
    end

    // mechanisms
    $display("commands load=%0d dist=%0d perp=%0d qnum=%0d tesum=%0d store=%0d move=%0d grid=%0d",
      n_cmd[0], n_cmd[1], n_cmd[2], n_cmd[3], n_cmd[4], n_cmd[5], n_cmd[6], n_cmd[7]);
    $display("grants %0d %0d %0d  stalls %0d  read returns %0d  fitness rounds %0d  accepts %0d  TE switches %0d",
      n_gnt[0], n_gnt[1], n_gnt[2], n_stall, n_rret, n_fit, de_accepts, n_sel_switch);
    for (int i = 0; i < 8; i++) begin checks++; if (n_cmd[i] == 0) begin failures++; $display("FAIL command %0d never ran", i); end end
    for (int p = 0; p < 3; p++) begin checks++; if (n_gnt[p] == 0) begin failures++; $display("FAIL no grant on port %0d", p); end end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no DRAM stall"); end
    checks++; if (n_cmd[1] != 3) begin failures++; $display("FAIL chunked distance"); end
    checks++; if (n_rret != K + 2 * K) begin failures++; $display("FAIL read returns %0d", n_rret); end
    checks++; if (n_fit != 4) begin failures++; $display("FAIL fitness rounds %0d", n_fit); end
    checks++; if (de_accepts == 0) begin failures++; $display("FAIL no accepted trial"); end
    checks++; if (n_sel_switch < 2) begin failures++; $display("FAIL TE group never switched"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
