// nms_top: the DE-SNE near-memory sampling circuit (NMS), the logic die under the DRAM stack.
//
// Blocks and connections follow the paper's accelerator figure:
//   * Arb (dram_arb) between the DRAM dies and the circuit, feeding RA0 and RA1 and taking
//     RB2 write-backs;
//   * "compute sigma and P": RA0 (16 KB) broadcasting row operands, RA1 (64 B) with the Rand
//     generator multicasting column operands, the 8x8 PEA array, RA2 (64 B) collecting result
//     rows, and the TE array (8 groups of 64 TEs) for vector comparison and addition;
//   * "compute Q and Grad": RB0 (16 KB), RB1 (64 B), the 8x8 PEB array and RB2 (16 KB);
//   * the controller (nms_ctrl) and the differential-evolution unit (de_unit) that together
//     sequence the work;
//   * the grid sampler (grid_sampler), which grids the 2-D embedding and keeps a bounded number
//     of random samples per cell, drawing its random numbers from lane 0 of Rand.
// TE group 0 is shared: the DE unit drives it during a perplexity search, the controller
// otherwise; the other seven groups are driven by the controller with zero operands in this
// command set. The host side is a command port (see nms_ctrl for the commands); the DRAM side
// is a line port of 256 bits with a request tag that the DRAM returns with read data.
// Parameters default to the sizes in the paper; words are Q16.16 (this design's choice).
module nms_top
  import nms_pkg::*;
#(
  parameter int unsigned SRAM_DEPTH = 512,   // 16 KB per large buffer
  parameter int unsigned TE_GROUPS  = 8,
  parameter int unsigned POP        = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // host command port
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        done,
  output fxp_t        result,
  output fxp_t        result2,
  output logic [31:0] de_accepts,      // DE selections that kept the trial (last search)
  // DRAM line port
  output logic        d_req,
  output logic        d_we,
  output logic [19:0] d_addr,
  output line_t       d_wdata,
  output logic [1:0]  d_tag,
  input  logic        d_ready,
  input  logic        d_rvalid,
  input  logic [1:0]  d_rtag,
  input  line_t       d_rdata
);
  localparam int unsigned SA    = $clog2(SRAM_DEPTH);
  localparam int unsigned NLEAF = 32;

  // ---------------- arbiter ----------------
  logic [2:0] dq_req, dq_we, dq_gnt, dq_rvalid;
  logic [2:0][19:0] dq_addr;
  line_t [2:0] dq_wdata;
  line_t dq_rdata;

  dram_arb #(.NREQ(3), .AW(20), .LINE_W(LINE_W)) u_arb (
    .clk, .rst_n,
    .req(dq_req), .we(dq_we), .addr(dq_addr), .wdata(dq_wdata),
    .gnt(dq_gnt), .rvalid(dq_rvalid), .rdata(dq_rdata),
    .d_req, .d_we, .d_addr, .d_wdata(d_wdata), .d_tag, .d_ready, .d_rvalid, .d_rtag, .d_rdata(d_rdata)
  );

  // ---------------- buffers ----------------
  logic ra0_en, ra0_we, rb0_en, rb0_we, rb2_en, rb2_we;
  logic [SA-1:0] ra0_addr, rb0_addr, rb2_addr;
  line_t ra0_wdata, ra0_rdata, rb0_wdata, rb0_rdata, rb2_wdata, rb2_rdata;

  nms_sram #(.DEPTH(SRAM_DEPTH), .LINE_W(LINE_W)) u_ra0 (
    .clk, .en(ra0_en), .we(ra0_we), .addr(ra0_addr), .wdata(ra0_wdata), .rdata(ra0_rdata));
  nms_sram #(.DEPTH(SRAM_DEPTH), .LINE_W(LINE_W)) u_rb0 (
    .clk, .en(rb0_en), .we(rb0_we), .addr(rb0_addr), .wdata(rb0_wdata), .rdata(rb0_rdata));
  nms_sram #(.DEPTH(SRAM_DEPTH), .LINE_W(LINE_W)) u_rb2 (
    .clk, .en(rb2_en), .we(rb2_we), .addr(rb2_addr), .wdata(rb2_wdata), .rdata(rb2_rdata));

  logic ra1_we, ra1_waddr, ra1_raddr, ra2_we, ra2_waddr, ra2_raddr, rb1_we, rb1_waddr, rb1_raddr;
  line_t ra1_wdata, ra1_rdata, ra2_wdata, ra2_rdata, rb1_wdata, rb1_rdata;

  vbuf #(.LINES(2)) u_ra1 (.clk, .rst_n, .we(ra1_we), .waddr(ra1_waddr), .wdata(ra1_wdata),
                           .raddr(ra1_raddr), .rdata(ra1_rdata));
  vbuf #(.LINES(2)) u_ra2 (.clk, .rst_n, .we(ra2_we), .waddr(ra2_waddr), .wdata(ra2_wdata),
                           .raddr(ra2_raddr), .rdata(ra2_rdata));
  vbuf #(.LINES(2)) u_rb1 (.clk, .rst_n, .we(rb1_we), .waddr(rb1_waddr), .wdata(rb1_wdata),
                           .raddr(rb1_raddr), .rdata(rb1_rdata));

  // ---------------- arrays ----------------
  logic pea_en, peb_en, pea_rd_ob1, peb_rd_ob1;
  pe_uop_t pea_uop, peb_uop;
  logic [7:0] pea_row_en, peb_row_en;
  line_t pea_row_in, pea_col_in, pea_rd_data, peb_row_in, peb_col_in, peb_rd_data;
  logic [2:0] pea_rd_row, peb_rd_row;

  pea_array u_pea (.clk, .rst_n, .en(pea_en), .uop(pea_uop), .row_en(pea_row_en),
                   .row_in(pea_row_in), .col_in(pea_col_in),
                   .rd_row(pea_rd_row), .rd_ob1(pea_rd_ob1), .rd_data(pea_rd_data));
  peb_array u_peb (.clk, .rst_n, .en(peb_en), .uop(peb_uop), .row_en(peb_row_en),
                   .row_in(peb_row_in), .col_in(peb_col_in),
                   .rd_row(peb_rd_row), .rd_ob1(peb_rd_ob1), .rd_data(peb_rd_data));

  // ---------------- TE array ----------------
  te_op_e te_leaf_op, te_red_op, c_leaf_op, c_red_op, de_leaf_op, de_red_op;
  fxp_t [TE_GROUPS-1:0][NLEAF-1:0] te_a, te_b, te_leaf_c;
  logic [TE_GROUPS-1:0][NLEAF-1:0][31:0] te_ai, te_bi, te_leaf_ci;
  fxp_t [TE_GROUPS-1:0] te_root_c, te_acc_c;
  logic [TE_GROUPS-1:0][31:0] te_root_ci, te_acc_ci;
  logic te_acc_clr, te_acc_en, c_acc_clr, c_acc_en, de_acc_clr, de_acc_en, te_de_sel;
  fxp_t [NLEAF-1:0] c_te_a, c_te_b, de_te_a, de_te_b;
  logic [NLEAF-1:0][31:0] de_te_ai, de_te_bi;

  always_comb begin
    te_a = '{default: '0}; te_b = '{default: '0}; te_ai = '0; te_bi = '0;
    if (te_de_sel) begin
      te_leaf_op = de_leaf_op; te_red_op = de_red_op; te_acc_clr = de_acc_clr; te_acc_en = de_acc_en;
      te_a[0] = de_te_a; te_b[0] = de_te_b; te_ai[0] = de_te_ai; te_bi[0] = de_te_bi;
    end else begin
      te_leaf_op = c_leaf_op; te_red_op = c_red_op; te_acc_clr = c_acc_clr; te_acc_en = c_acc_en;
      te_a[0] = c_te_a; te_b[0] = c_te_b;
    end
  end

  te_array #(.GROUPS(TE_GROUPS), .LEAVES(NLEAF), .PW(32)) u_te (
    .clk, .rst_n, .leaf_op(te_leaf_op), .red_op(te_red_op),
    .a(te_a), .b(te_b), .ai(te_ai), .bi(te_bi),
    .leaf_c(te_leaf_c), .leaf_ci(te_leaf_ci), .root_c(te_root_c), .root_ci(te_root_ci),
    .acc_clr(te_acc_clr), .acc_en(te_acc_en), .acc_c(te_acc_c), .acc_ci(te_acc_ci)
  );

  // ---------------- Rand and DE ----------------
  logic rnd_load, rnd_next;
  logic [31:0] rnd_seed;
  logic [3:0][31:0] rnd;
  logic de_rnd_next, gs_clr, gs_valid, gs_keep;
  assign rnd_next = de_rnd_next || gs_valid;
  rand_gen #(.NOUT(4)) u_rand (.clk, .rst_n, .load(rnd_load), .seed(rnd_seed), .next(rnd_next), .rnd);

  // ---------------- gridding and sampling ----------------
  fxp_t gs_x, gs_y, gs_x0, gs_y0;
  logic [4:0] gs_shift;
  logic [7:0] gs_quota, gs_cell;
  logic [15:0] gs_thr;
  logic [31:0] gs_n_kept;
  grid_sampler #(.GRID(16), .CW(8)) u_grid (
    .clk, .rst_n, .clr(gs_clr), .valid(gs_valid), .x(gs_x), .y(gs_y), .x0(gs_x0), .y0(gs_y0),
    .shift(gs_shift), .quota(gs_quota), .thr(gs_thr), .rnd(rnd[0][15:0]),
    .cell_id(gs_cell), .keep(gs_keep), .n_kept(gs_n_kept)
  );

  logic de_start, de_done, de_busy, de_fit_req, de_fit_ack;
  fxp_t de_tgt, de_lb, de_ub, de_best_ind, de_best_abs;
  logic [15:0] de_gens;
  fxp_t [POP-1:0] de_fit_x, de_fit_val;

  de_unit #(.POP(POP), .LANES(4), .NLEAF(NLEAF)) u_de (
    .clk, .rst_n, .start(de_start), .tgt(de_tgt), .lb(de_lb), .ub(de_ub), .gens(de_gens),
    .busy(de_busy), .done(de_done), .best_ind(de_best_ind), .best_abs(de_best_abs),
    .n_accept(de_accepts),
    .fit_req(de_fit_req), .fit_x(de_fit_x), .fit_ack(de_fit_ack), .fit_val(de_fit_val),
    .rnd_next(de_rnd_next), .rnd,
    .te_leaf_op(de_leaf_op), .te_red_op(de_red_op), .te_a(de_te_a), .te_b(de_te_b),
    .te_ai(de_te_ai), .te_bi(de_te_bi), .te_acc_clr(de_acc_clr), .te_acc_en(de_acc_en),
    .te_leaf_c(te_leaf_c[0]), .te_leaf_ci(te_leaf_ci[0]), .te_acc_c(te_acc_c[0]), .te_acc_ci(te_acc_ci[0])
  );

  // ---------------- controller ----------------
  nms_ctrl #(.DEPTH(SRAM_DEPTH), .POP(POP), .NLEAF(NLEAF)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .result, .result2,
    .dq_req, .dq_we, .dq_addr, .dq_wdata, .dq_gnt, .dq_rvalid, .dq_rdata,
    .ra0_en, .ra0_we, .ra0_addr, .ra0_wdata, .ra0_rdata,
    .rb0_en, .rb0_we, .rb0_addr, .rb0_wdata, .rb0_rdata,
    .rb2_en, .rb2_we, .rb2_addr, .rb2_wdata, .rb2_rdata,
    .ra1_we, .ra1_waddr, .ra1_wdata, .ra1_raddr, .ra1_rdata,
    .ra2_we, .ra2_waddr, .ra2_wdata, .ra2_raddr, .ra2_rdata,
    .rb1_we, .rb1_waddr, .rb1_wdata, .rb1_raddr, .rb1_rdata,
    .pea_en, .pea_uop, .pea_row_en, .pea_row_in, .pea_col_in, .pea_rd_row, .pea_rd_ob1, .pea_rd_data,
    .peb_en, .peb_uop, .peb_row_en, .peb_row_in, .peb_col_in, .peb_rd_row, .peb_rd_ob1, .peb_rd_data,
    .te_de_sel, .te_leaf_op(c_leaf_op), .te_red_op(c_red_op), .te_a(c_te_a), .te_b(c_te_b),
    .te_acc_clr(c_acc_clr), .te_acc_en(c_acc_en), .te_acc_c(te_acc_c[0]),
    .rnd_load, .rnd_seed,
    .de_start, .de_tgt, .de_lb, .de_ub, .de_gens, .de_done, .de_best_ind, .de_best_abs,
    .de_fit_req, .de_fit_x, .de_fit_ack, .de_fit_val,
    .gs_clr, .gs_valid, .gs_x, .gs_y, .gs_x0, .gs_y0, .gs_shift, .gs_quota, .gs_thr,
    .gs_cell, .gs_keep, .gs_n_kept
  );
endmodule
