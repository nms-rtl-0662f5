// tb_de_unit: the DE-SNE search unit with its TE group and Rand generator, as in the top.
// The fitness is a function worked out here, f(x) = x^2 (x in Q16.16), returned a few
// cycles after each request, so the search must find x = sqrt(tgt) inside [lb, ub].
// Checks: every individual sent for evaluation lies in [lb, ub]; best_abs equals
// |f(best_ind) - tgt|; best_abs never grows from one generation to the next; after the run
// the best is close to sqrt(tgt); some trials were accepted; the number of fitness rounds is
// gens + 1; and a generation takes 8 batches x (5 mutation + 2 crossover) cycles, then the
// evaluation, then 8 x 4 selection cycles and 2 best-update cycles (Fig. 10's per-batch
// counts), i.e. 91 cycles from one evaluation's acknowledge to the next request (59 after the
// initial evaluation, which has no selection).
module tb_de_unit;
  import nms_pkg::*;
  localparam int POP = 32, LANES = 4, NLEAF = 32, GENS = 12, ACKLAT = 3;
  logic clk = 0, rst_n = 0, start = 0;
  fxp_t tgt, lb, ub, best_ind, best_abs;
  logic [15:0] gens;
  logic busy, done, fit_req, fit_ack = 0, rnd_next;
  logic [31:0] n_accept;
  fxp_t [POP-1:0] fit_x, fit_val;
  logic [LANES-1:0][31:0] rnd;
  te_op_e leaf_op, red_op;
  fxp_t [NLEAF-1:0] te_a, te_b, leaf_c;
  logic [NLEAF-1:0][31:0] te_ai, te_bi, leaf_ci;
  logic acc_clr, acc_en;
  fxp_t root_c, acc_c; logic [31:0] root_ci, acc_ci;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  de_unit #(.POP(POP), .LANES(LANES), .NLEAF(NLEAF)) dut (
    .clk, .rst_n, .start, .tgt, .lb, .ub, .gens, .busy, .done, .best_ind, .best_abs, .n_accept,
    .fit_req, .fit_x, .fit_ack, .fit_val, .rnd_next, .rnd,
    .te_leaf_op(leaf_op), .te_red_op(red_op), .te_a, .te_b, .te_ai, .te_bi,
    .te_acc_clr(acc_clr), .te_acc_en(acc_en), .te_leaf_c(leaf_c), .te_leaf_ci(leaf_ci),
    .te_acc_c(acc_c), .te_acc_ci(acc_ci));
  te_tree #(.LEAVES(NLEAF)) u_te (.clk, .rst_n, .leaf_op, .red_op, .a(te_a), .b(te_b), .ai(te_ai), .bi(te_bi),
    .leaf_c, .leaf_ci, .root_c, .root_ci, .acc_clr, .acc_en, .acc_c, .acc_ci);
  rand_gen #(.NOUT(LANES)) u_rand (.clk, .rst_n, .load(start), .seed(32'hC0FFEE11), .next(rnd_next), .rnd);

  function automatic fxp_t f(fxp_t x); return fxp_mul(x, x); endfunction
  always_comb for (int k = 0; k < POP; k++) fit_val[k] = f(fit_x[k]);

  int cyc = 0, req_cnt = 0, ack_cyc = -1, rounds = 0;
  logic req_q = 0;
  fxp_t prev_abs;
  logic have_prev = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    req_q <= fit_req && !fit_ack;
    fit_ack <= 0;
    if (rst_n && fit_req && !fit_ack) begin
      if (!req_q) begin
        rounds <= rounds + 1;
        if (ack_cyc >= 0) begin
          checks++;
          if (cyc - ack_cyc != ((rounds == 1) ? 59 : 91)) begin failures++; $display("FAIL generation cycles %0d", cyc - ack_cyc); end
        end
        for (int k = 0; k < POP; k++) begin
          checks++;
          if (fit_x[k] < lb || fit_x[k] > ub) begin failures++; $display("FAIL out of bounds %0d", fit_x[k]); end
        end
      end
      req_cnt <= req_cnt + 1;
      if (req_cnt == ACKLAT) begin fit_ack <= 1; req_cnt <= 0; ack_cyc <= cyc + 1; end
    end
    // after each best update (acc_en cycle), check the best so far
    if (acc_en) begin
      #1;
      checks++;
      if (best_abs != ((f(best_ind) > tgt) ? f(best_ind) - tgt : tgt - f(best_ind))) begin
        failures++; $display("FAIL best_abs %0d for %0d", best_abs, best_ind);
      end
      if (have_prev) begin
        checks++; if (best_abs > prev_abs) begin failures++; $display("FAIL best grew"); end
      end
      prev_abs = best_abs; have_prev = 1;
    end
  end

  initial begin
    real xb;
    tgt = 32'sh0009_0000;       // 9.0 -> x = 3
    lb = 32'sh0000_2000; ub = 32'sh000A_0000; gens = GENS;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done); @(negedge clk);
    xb = $itor(best_ind) / 65536.0;
    $display("best %f abs %f accepts %0d rounds %0d", xb, $itor(best_abs) / 65536.0, n_accept, rounds);
    checks++; if (xb < 2.99 || xb > 3.01) begin failures++; $display("FAIL not converged"); end
    checks++; if (n_accept == 0) failures++;
    checks++; if (rounds != GENS + 1) begin failures++; $display("FAIL rounds %0d", rounds); end
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
