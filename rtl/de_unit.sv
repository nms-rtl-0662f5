// de_unit: differential-evolution (DE) search of the t-SNE bandwidth for one sample, DE-SNE.
//
// DE-SNE replaces t-SNE's bisection on sigma_i by Algorithm 1 of the paper: a population of
// POP = 32 individuals, mutation mut = a + F*(b - c) clipped to [lb, ub] with a, b, c drawn at
// random from the other individuals, crossover trial = (rand < CR) ? mut : p[i], and selection
// p[i] = trial when |f(trial) - tgt| < |f(p[i]) - tgt|, keeping the best individual seen.
// Here an individual is the precision beta = 1/(2 sigma^2) (Q16.16) and f is the entropy of
// the conditional distribution p_{j|i} in nats, evaluated outside this unit (on the PEA array)
// through the fitness handshake; tgt is ln(perplexity). Searching beta instead of sigma is this
// design's choice; both fix the same Gaussian.
//
// Schedule (Fig. 10): individuals go through in batches of LANES = 4.
//   mutation  5 cycles per batch: c drawn; b drawn and d = b - c (TE SUB); F loaded;
//             e = F*d; a drawn and mut = e + a (TE ADD), then clipped;
//   crossover 2 cycles per batch: mut and CR loaded; TE compares CR with rand[0,1) and passes
//             mut or p[i] as trial;
//   after all batches the POP trials are sent for fitness (fit_req until fit_ack);
//   selection 4 cycles per batch: abs0 = |f(trial) - tgt|, abs1 = |f(p) - tgt| (TE ABSD), load,
//             TE compares abs1 with abs0 and passes trial or p (and its fitness);
//   best      2 cycles: |f(p) - tgt| for all POP on the TE leaves, then the TE tree takes the
//             minimum with its individual and the accumulating TE folds it into the best so far.
// The population starts uniform in [lb, ub) (one batch per cycle) and is evaluated once.
// The TE group used is outside this unit (te_* ports); the random numbers come from the Rand
// generator (rnd, rnd_next). Random indices are drawn independently, excluding i:
// idx = (r * (POP-1)) >> 16, plus one if idx >= i. In the paper the multiply of the mutation
// runs on a PEA; here it is a multiplier in this unit (see the documentation).
module de_unit
  import nms_pkg::*;
#(
  parameter int unsigned POP   = 32,
  parameter int unsigned LANES = 4,
  parameter int unsigned NLEAF = 32,        // leaves of the TE group driven by this unit
  parameter fxp_t        F     = 32'sh0000_8000,   // 0.5
  parameter fxp_t        CR    = 32'sh0000_B333    // 0.7
) (
  input  logic clk,
  input  logic rst_n,
  // control
  input  logic        start,
  input  fxp_t        tgt,
  input  fxp_t        lb,
  input  fxp_t        ub,
  input  logic [15:0] gens,
  output logic        busy,
  output logic        done,          // one-cycle pulse
  output fxp_t        best_ind,
  output fxp_t        best_abs,      // |f(best) - tgt|
  output logic [31:0] n_accept,      // selections that took the trial
  // fitness evaluation
  output logic                 fit_req,
  output fxp_t [POP-1:0]       fit_x,
  input  logic                 fit_ack,
  input  fxp_t [POP-1:0]       fit_val,
  // random numbers
  output logic                  rnd_next,
  input  logic [LANES-1:0][31:0] rnd,
  // TE group
  output te_op_e                      te_leaf_op,
  output te_op_e                      te_red_op,
  output fxp_t [NLEAF-1:0]            te_a,
  output fxp_t [NLEAF-1:0]            te_b,
  output logic [NLEAF-1:0][31:0]      te_ai,
  output logic [NLEAF-1:0][31:0]      te_bi,
  output logic                        te_acc_clr,
  output logic                        te_acc_en,
  input  fxp_t [NLEAF-1:0]            te_leaf_c,
  input  logic [NLEAF-1:0][31:0]      te_leaf_ci,
  input  fxp_t                        te_acc_c,
  input  logic [31:0]                 te_acc_ci
);
  localparam int unsigned NB = POP / LANES;
  localparam int unsigned BW = (NB > 1) ? $clog2(NB) : 1;
  localparam int unsigned IW = $clog2(POP);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_FITP, S_BESTA, S_BESTB, S_MUT, S_XOV, S_FITT, S_SEL, S_DONE
  } state_e;

  state_e       st;
  logic [BW-1:0] bat;
  logic [2:0]   ph;
  logic [15:0]  gen, gens_q;
  fxp_t         tgt_q, lb_q, ub_q;

  fxp_t pop   [POP];
  fxp_t pval  [POP];
  fxp_t trial [POP];
  fxp_t tval  [POP];
  fxp_t absv  [POP];
  fxp_t cv [LANES], dv [LANES], ev [LANES], a0 [LANES], a1 [LANES];

  function automatic logic [IW-1:0] pick_idx(logic [31:0] r, int unsigned self);
    logic [IW+15:0] p;
    logic [IW-1:0]  k;
    p = {{IW{1'b0}}, r[15:0]} * (IW+16)'(POP - 1);
    k = p[IW+15:16];
    if (int'(k) >= int'(self)) k = k + 1'b1;
    return k;
  endfunction

  function automatic fxp_t clip(fxp_t v, fxp_t lo, fxp_t hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return v;
  endfunction

  // ---------------- TE drive ----------------
  always_comb begin
    te_leaf_op = TE_MIN;
    te_red_op  = TE_MIN;
    te_a  = '{default: FXP_MAX};
    te_b  = '{default: FXP_MAX};
    te_ai = '0;
    te_bi = '0;
    te_acc_clr = (st == S_IDLE) && start;
    te_acc_en  = (st == S_BESTB);
    for (int j = 0; j < int'(LANES); j++) begin
      int unsigned i;
      i = int'(bat) * LANES + j;
      if (st == S_MUT && ph == 3'd1) begin
        te_leaf_op = TE_SUB;
        te_a[j] = pop[pick_idx(rnd[j], i)];
        te_b[j] = cv[j];
      end else if (st == S_MUT && ph == 3'd4) begin
        te_leaf_op = TE_ADD;
        te_a[j] = ev[j];
        te_b[j] = pop[pick_idx(rnd[j], i)];
      end else if (st == S_XOV && ph == 3'd1) begin
        te_leaf_op = TE_MIN;
        te_a[j]  = CR;
        te_b[j]  = fxp_t'({16'd0, rnd[j][15:0]});
        te_ai[j] = pop[i];
        te_bi[j] = mutv_w(j);
      end else if (st == S_SEL && ph == 3'd0) begin
        te_leaf_op = TE_ABSD;
        te_a[j] = tval[i];
        te_b[j] = tgt_q;
      end else if (st == S_SEL && ph == 3'd1) begin
        te_leaf_op = TE_ABSD;
        te_a[j] = pval[i];
        te_b[j] = tgt_q;
      end else if (st == S_SEL && ph == 3'd3) begin
        te_leaf_op = TE_MIN;
        te_a[j]  = a1[j];  te_b[j]  = a0[j];
        te_ai[j] = pop[i]; te_bi[j] = trial[i];
        te_a[LANES+j]  = a1[j];   te_b[LANES+j]  = a0[j];
        te_ai[LANES+j] = pval[i]; te_bi[LANES+j] = tval[i];
      end
    end
    if (st == S_BESTA) begin
      te_leaf_op = TE_ABSD;
      for (int k = 0; k < int'(POP); k++) begin te_a[k] = pval[k]; te_b[k] = tgt_q; end
    end else if (st == S_BESTB) begin
      te_leaf_op = TE_MIN;
      for (int k = 0; k < int'(POP); k++) begin te_a[k] = absv[k]; te_ai[k] = pop[k]; end
    end
  end

  // mutant of lane j, held in ev[j] after the add step
  function automatic fxp_t mutv_w(int unsigned j);
    return ev[j];
  endfunction

  assign rnd_next = (st == S_INIT) || (st == S_MUT && (ph == 3'd0 || ph == 3'd1 || ph == 3'd4))
                 || (st == S_XOV && ph == 3'd1);

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; bat <= '0; ph <= '0; gen <= '0; gens_q <= '0;
      tgt_q <= '0; lb_q <= '0; ub_q <= '0; n_accept <= '0; done <= 1'b0;
      for (int k = 0; k < int'(POP); k++) begin
        pop[k] <= '0; pval[k] <= '0; trial[k] <= '0; tval[k] <= '0; absv[k] <= '0;
      end
      for (int j = 0; j < int'(LANES); j++) begin
        cv[j] <= '0; dv[j] <= '0; ev[j] <= '0; a0[j] <= '0; a1[j] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          tgt_q <= tgt; lb_q <= lb; ub_q <= ub; gens_q <= gens;
          gen <= '0; bat <= '0; ph <= '0; n_accept <= '0;
          st <= S_INIT;
        end
        S_INIT: begin
          for (int j = 0; j < int'(LANES); j++)
            pop[int'(bat)*LANES + j] <= fxp_add(lb_q, fxp_mul(fxp_t'({16'd0, rnd[j][15:0]}),
                                                               fxp_sub(ub_q, lb_q)));
          bat <= bat + 1'b1;
          if (int'(bat) == NB - 1) begin bat <= '0; st <= S_FITP; end
        end
        S_FITP: if (fit_ack) begin
          for (int k = 0; k < int'(POP); k++) pval[k] <= fit_val[k];
          st <= S_BESTA;
        end
        S_BESTA: begin
          for (int k = 0; k < int'(POP); k++) absv[k] <= te_leaf_c[k];
          st <= S_BESTB;
        end
        S_BESTB: begin
          if (gen == gens_q) st <= S_DONE;
          else begin st <= S_MUT; bat <= '0; ph <= '0; end
        end
        S_MUT: begin
          for (int j = 0; j < int'(LANES); j++) begin
            int unsigned i;
            i = int'(bat) * LANES + j;
            unique case (ph)
              3'd0: cv[j] <= pop[pick_idx(rnd[j], i)];
              3'd1: dv[j] <= te_leaf_c[j];
              3'd2: ;
              3'd3: ev[j] <= fxp_mul(F, dv[j]);
              default: ev[j] <= clip(te_leaf_c[j], lb_q, ub_q);
            endcase
          end
          if (ph == 3'd4) begin ph <= '0; st <= S_XOV; end
          else ph <= ph + 1'b1;
        end
        S_XOV: begin
          if (ph == 3'd1) begin
            for (int j = 0; j < int'(LANES); j++) trial[int'(bat)*LANES + j] <= te_leaf_ci[j];
            ph <= '0;
            if (int'(bat) == NB - 1) begin bat <= '0; st <= S_FITT; end
            else begin bat <= bat + 1'b1; st <= S_MUT; end
          end else ph <= ph + 1'b1;
        end
        S_FITT: if (fit_ack) begin
          for (int k = 0; k < int'(POP); k++) tval[k] <= fit_val[k];
          st <= S_SEL; bat <= '0; ph <= '0;
        end
        S_SEL: begin
          for (int j = 0; j < int'(LANES); j++) begin
            int unsigned i;
            i = int'(bat) * LANES + j;
            unique case (ph)
              3'd0: a0[j] <= te_leaf_c[j];
              3'd1: a1[j] <= te_leaf_c[j];
              3'd2: ;
              default: begin
                pop[i]  <= te_leaf_ci[j];
                pval[i] <= te_leaf_ci[LANES+j];
              end
            endcase
          end
          if (ph == 3'd3) begin
            n_accept <= n_accept + 32'(count_acc());
            ph <= '0;
            if (int'(bat) == NB - 1) begin bat <= '0; gen <= gen + 1'b1; st <= S_BESTA; end
            else bat <= bat + 1'b1;
          end else ph <= ph + 1'b1;
        end
        S_DONE: begin
          done <= 1'b1;
          st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  function automatic int count_acc();
    int n;
    n = 0;
    for (int j = 0; j < int'(LANES); j++) if (a1[j] > a0[j]) n++;
    return n;
  endfunction

  always_comb begin
    fit_req = (st == S_FITP) || (st == S_FITT);
    for (int k = 0; k < int'(POP); k++) fit_x[k] = (st == S_FITT) ? trial[k] : pop[k];
  end

  assign busy     = (st != S_IDLE);
  assign best_ind = te_acc_ci;
  assign best_abs = te_acc_c;
endmodule
