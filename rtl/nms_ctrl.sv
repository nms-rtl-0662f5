// nms_ctrl: controller of the DE-SNE sampling circuit.
//
// The paper only names a controller ("ctrl" in its power and area breakdown). This design
// makes it a command sequencer: a host (the memory-side interface of the stack) hands it one
// command at a time (cmd_valid/cmd_ready); the controller runs the command over the buffers,
// the arrays and the DRAM arbiter and pulses done, with scalar results in result/result2.
//
//   CMD_LOAD  DRAM lines dram_addr.. -> RA0 (dst_sel 0) or RB0 (dst_sel 1) lines addr_a..,
//             len lines, through arbiter port 0.
//   CMD_DIST  squared distances between two tiles of 8 samples (Fig. 9 dataflow). Tile A is
//             in RA0 lines addr_a..addr_a+K-1 (line k = feature k of the 8 row samples), tile B
//             is streamed from DRAM lines dram_addr.. through port 1 into RA1 (line k = feature
//             k of the 8 column samples), K = len. Per feature the PEA array runs
//             OB0 += row*col (X X'), OB1 += row*row (||x_n||^2), IB1 += col*col (||x_m||^2);
//             then OB0 = OB1 + IB1 - 2*OB0. The 8 result rows pass through RA2 into RB0 lines
//             addr_b..addr_b+7 (line n = distances of row sample n to the 8 column samples).
//             Samples with more features than RA0 holds go through in chunks of features:
//             gens[0] = 1 continues the sums of the previous DIST (no clear), gens[1] = 1 stops
//             after accumulating (more chunks follow, no finish and no write-back).
//   CMD_MOVE  RB0 lines addr_a.. -> RA2 -> RA0 lines addr_b.., len lines.
//   CMD_PERP  DE-SNE bandwidth search for one sample. Its distances to the others are the
//             8*len words of RA0 lines addr_a..; word number addr_b (the sample itself) is
//             ignored, and padding words set to the largest value contribute nothing.
//             The Rand generator is seeded with seed, the DE unit runs gens generations over
//             beta in [arg1, arg2] toward entropy arg0 = ln(perplexity). Each fitness request
//             of the DE unit is served on the PEA array: individual k sits in PE (k/8, k%8)
//             (IB1); per distance d the array runs t = d*beta, t = -t, e = exp(t), S += e,
//             W += d*e; then H = ln S + beta*W/S. result = best beta, result2 = |H - target|.
//   CMD_QNUM  PEB array: 8 RB0 lines addr_a.. go through RB1 into PEB rows 0..7, each element
//             computes (1 + d)^-1 (Student-t kernel of Q), rows are written to RB2 addr_b...
//   CMD_TESUM sum of all words of RB2 lines addr_a.. (len lines) on TE group 0: leaf adds of
//             word pairs, tree sum, accumulating TE; result = the sum (Q's normaliser).
//   CMD_STORE RB2 lines addr_a.. -> DRAM lines dram_addr.., len lines, through port 2.
//   CMD_GRID  gridding and sampling of the 2-D embedding: RB2 lines addr_a.. (len lines) hold
//             4 points each (x in word 2j, y in word 2j+1); one point per cycle goes through
//             the grid sampler (origin arg0/arg1, cell size 2^arg2[4:0], quota gens[7:0],
//             keep threshold seed[15:0]); RB0 line addr_b+i receives, for the points of line i,
//             the cell number in word 2j and the keep flag in word 2j+1; result = points kept.
//
// Everything here, from the command set to the cycle-by-cycle schedule, is this design's own;
// the data paths used (RA0 row broadcast, RA1 column multicast, array rows out through RA2,
// RB0 -> RA2 -> RA0, RB1 multicast into the PEB array, PEB rows into RB2, TE array for sums
// and the DE steps) are those drawn in the paper. Gradient and embedding-update sequences
// and the symmetrisation of P are not part of this command set.
module nms_ctrl
  import nms_pkg::*;
#(
  parameter int unsigned DEPTH = 512,   // lines per large SRAM
  parameter int unsigned POP   = 32,
  parameter int unsigned NLEAF = 32,
  localparam int unsigned SA   = $clog2(DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  // host
  input  logic  cmd_valid,
  output logic  cmd_ready,
  input  cmd_t  cmd,
  output logic  done,
  output fxp_t  result,
  output fxp_t  result2,
  // DRAM arbiter requesters: 0 RA0/RB0 fill, 1 RA1 stream, 2 RB2 write-back
  output logic [2:0]             dq_req,
  output logic [2:0]             dq_we,
  output logic [2:0][19:0]       dq_addr,
  output line_t [2:0]            dq_wdata,
  input  logic [2:0]             dq_gnt,
  input  logic [2:0]             dq_rvalid,
  input  line_t                  dq_rdata,
  // large buffers
  output logic ra0_en, output logic ra0_we, output logic [SA-1:0] ra0_addr, output line_t ra0_wdata,
  input  line_t ra0_rdata,
  output logic rb0_en, output logic rb0_we, output logic [SA-1:0] rb0_addr, output line_t rb0_wdata,
  input  line_t rb0_rdata,
  output logic rb2_en, output logic rb2_we, output logic [SA-1:0] rb2_addr, output line_t rb2_wdata,
  input  line_t rb2_rdata,
  // 64 B buffers
  output logic ra1_we, output logic ra1_waddr, output line_t ra1_wdata, output logic ra1_raddr,
  input  line_t ra1_rdata,
  output logic ra2_we, output logic ra2_waddr, output line_t ra2_wdata, output logic ra2_raddr,
  input  line_t ra2_rdata,
  output logic rb1_we, output logic rb1_waddr, output line_t rb1_wdata, output logic rb1_raddr,
  input  line_t rb1_rdata,
  // PEA array
  output logic pea_en, output pe_uop_t pea_uop, output logic [7:0] pea_row_en,
  output line_t pea_row_in, output line_t pea_col_in,
  output logic [2:0] pea_rd_row, output logic pea_rd_ob1, input line_t pea_rd_data,
  // PEB array
  output logic peb_en, output pe_uop_t peb_uop, output logic [7:0] peb_row_en,
  output line_t peb_row_in, output line_t peb_col_in,
  output logic [2:0] peb_rd_row, output logic peb_rd_ob1, input line_t peb_rd_data,
  // TE group 0 (when te_de_sel is low)
  output logic te_de_sel,
  output te_op_e te_leaf_op, output te_op_e te_red_op,
  output fxp_t [NLEAF-1:0] te_a, output fxp_t [NLEAF-1:0] te_b,
  output logic te_acc_clr, output logic te_acc_en,
  input  fxp_t te_acc_c,
  // Rand and DE unit
  output logic rnd_load, output logic [31:0] rnd_seed,
  output logic de_start, output fxp_t de_tgt, output fxp_t de_lb, output fxp_t de_ub,
  output logic [15:0] de_gens,
  input  logic de_done, input fxp_t de_best_ind, input fxp_t de_best_abs,
  input  logic de_fit_req, input fxp_t [POP-1:0] de_fit_x,
  output logic de_fit_ack, output fxp_t [POP-1:0] de_fit_val,
  // grid sampler
  output logic gs_clr, output logic gs_valid, output fxp_t gs_x, output fxp_t gs_y,
  output fxp_t gs_x0, output fxp_t gs_y0, output logic [4:0] gs_shift,
  output logic [7:0] gs_quota, output logic [15:0] gs_thr,
  input  logic [7:0] gs_cell, input logic gs_keep, input logic [31:0] gs_n_kept
);
  typedef enum logic [4:0] {
    S_IDLE,
    S_LOAD,
    S_DCLR, S_DFETCH, S_DWAIT, S_DMAC, S_DFIN, S_DDRAIN,
    S_MOVE,
    S_PSTART, S_PWAIT, S_FLDB, S_FCLR, S_FRD0, S_FLOOP, S_FFIN, S_FOUT, S_FACK,
    S_QLD, S_QCMP, S_QDRAIN,
    S_TSUM,
    S_SRD, S_SREQ,
    S_GRD, S_GPT, S_GWR,
    S_DONE
  } state_e;

  state_e     st;
  cmd_t       c;
  logic [9:0] cnt;      // line / feature / row counter
  logic [9:0] rcv;      // lines received (LOAD)
  logic [2:0] ph;       // micro-operation phase
  logic [2:0] w;        // word within a line (PERP)
  fxp_t [POP-1:0] fitv;
  line_t      gline;    // cell numbers and keep flags of one line of points (GRID)

  // distance word fed in the PERP loop, the sample's own distance replaced by the largest value
  fxp_t dword;
  always_comb begin
    dword = ra0_rdata[w];
    if ({cnt[6:0], w} == c.addr_b) dword = FXP_MAX;
  end

  always_comb begin
    cmd_ready = (st == S_IDLE);
    dq_req = '0; dq_we = '0; dq_addr = '{default: '0}; dq_wdata = '{default: '0};
    ra0_en = 1'b0; ra0_we = 1'b0; ra0_addr = '0; ra0_wdata = '0;
    rb0_en = 1'b0; rb0_we = 1'b0; rb0_addr = '0; rb0_wdata = '0;
    rb2_en = 1'b0; rb2_we = 1'b0; rb2_addr = '0; rb2_wdata = '0;
    ra1_we = 1'b0; ra1_waddr = 1'b0; ra1_wdata = '0; ra1_raddr = cnt[0];
    ra2_we = 1'b0; ra2_waddr = 1'b0; ra2_wdata = '0; ra2_raddr = 1'b0;
    rb1_we = 1'b0; rb1_waddr = 1'b0; rb1_wdata = '0; rb1_raddr = 1'b0;
    pea_en = 1'b0; pea_uop = UOP_NOP; pea_row_en = '1; pea_row_in = '0; pea_col_in = '0;
    pea_rd_row = '0; pea_rd_ob1 = 1'b0;
    peb_en = 1'b0; peb_uop = UOP_NOP; peb_row_en = '1; peb_row_in = '0; peb_col_in = '0;
    peb_rd_row = '0; peb_rd_ob1 = 1'b0;
    te_de_sel = (st == S_PSTART) || (st == S_PWAIT) || (st == S_FLDB) || (st == S_FCLR) || (st == S_FRD0) ||
                (st == S_FLOOP) || (st == S_FFIN) || (st == S_FOUT) || (st == S_FACK);
    te_leaf_op = TE_ADD; te_red_op = TE_ADD;
    gs_clr = 1'b0; gs_valid = 1'b0; gs_x = '0; gs_y = '0;
    gs_x0 = c.arg0; gs_y0 = c.arg1; gs_shift = c.arg2[4:0]; gs_quota = c.gens[7:0]; gs_thr = c.seed[15:0];
    te_a = '{default: '0}; te_b = '{default: '0};
    te_acc_clr = 1'b0; te_acc_en = 1'b0;
    rnd_load = (st == S_PSTART); rnd_seed = c.seed;
    de_start = (st == S_PSTART); de_tgt = c.arg0; de_lb = c.arg1; de_ub = c.arg2; de_gens = c.gens;
    de_fit_ack = (st == S_FACK); de_fit_val = fitv;

    unique case (st)
      S_LOAD: begin
        dq_req[0]  = (cnt < c.len);
        dq_addr[0] = c.dram_addr + 20'(cnt);
        if (dq_rvalid[0]) begin
          if (c.dst_sel) begin rb0_en = 1'b1; rb0_we = 1'b1; rb0_addr = SA'(c.addr_a + rcv); rb0_wdata = dq_rdata; end
          else           begin ra0_en = 1'b1; ra0_we = 1'b1; ra0_addr = SA'(c.addr_a + rcv); ra0_wdata = dq_rdata; end
        end
      end
      S_DCLR: begin
        pea_en = 1'b1;
        unique case (ph)
          3'd0:    pea_uop = mk_uop(PF_PASS, SRC_ZERO, SRC_ZERO, DST_OB0);
          3'd1:    pea_uop = mk_uop(PF_PASS, SRC_ZERO, SRC_ZERO, DST_OB1);
          default: pea_uop = mk_uop(PF_PASS, SRC_ZERO, SRC_ZERO, DST_IB1);
        endcase
      end
      S_DFETCH: begin
        dq_req[1]  = 1'b1;
        dq_addr[1] = c.dram_addr + 20'(cnt);
        ra0_en = 1'b1; ra0_addr = SA'(c.addr_a + cnt);
      end
      S_DWAIT: begin
        if (dq_rvalid[1]) begin ra1_we = 1'b1; ra1_waddr = cnt[0]; ra1_wdata = dq_rdata; end
      end
      S_DMAC: begin
        pea_en = 1'b1; pea_row_in = ra0_rdata; pea_col_in = ra1_rdata;
        unique case (ph)
          3'd0:    pea_uop = mk_uop(PF_MAC, SRC_ROW, SRC_COL, DST_OB0);
          3'd1:    pea_uop = mk_uop(PF_MAC, SRC_ROW, SRC_ROW, DST_OB1);
          default: pea_uop = mk_uop(PF_MAC, SRC_COL, SRC_COL, DST_IB1);
        endcase
      end
      S_DFIN: begin
        pea_en = 1'b1;
        unique case (ph)
          3'd0:    pea_uop = mk_uop(PF_ADD, SRC_OB1, SRC_IB1, DST_OB1);
          3'd1:    pea_uop = mk_uop(PF_ADD, SRC_OB0, SRC_OB0, DST_IB0);
          default: pea_uop = mk_uop(PF_SUB, SRC_OB1, SRC_IB0, DST_OB0);
        endcase
      end
      S_DDRAIN: begin
        if (cnt < 10'd8) begin
          pea_rd_row = cnt[2:0];
          ra2_we = 1'b1; ra2_waddr = cnt[0]; ra2_wdata = pea_rd_data;
        end
        if (cnt >= 10'd1) begin
          ra2_raddr = ~cnt[0];
          rb0_en = 1'b1; rb0_we = 1'b1; rb0_addr = SA'(c.addr_b + cnt - 10'd1); rb0_wdata = ra2_rdata;
        end
      end
      S_MOVE: begin
        if (cnt < c.len) begin rb0_en = 1'b1; rb0_addr = SA'(c.addr_a + cnt); end
        if (cnt >= 10'd1 && cnt <= c.len) begin
          ra2_we = 1'b1; ra2_waddr = ~cnt[0]; ra2_wdata = rb0_rdata;
        end
        if (cnt >= 10'd2) begin
          ra2_raddr = cnt[0];
          ra0_en = 1'b1; ra0_we = 1'b1; ra0_addr = SA'(c.addr_b + cnt - 10'd2); ra0_wdata = ra2_rdata;
        end
      end
      S_FLDB: begin
        if (cnt < 10'd4) begin
          ra1_we = 1'b1; ra1_waddr = cnt[0];
          for (int m = 0; m < 8; m++) ra1_wdata[m] = de_fit_x[8*int'(cnt[1:0]) + m];
        end
        if (cnt >= 10'd1) begin
          ra1_raddr = ~cnt[0];
          pea_en = 1'b1; pea_col_in = ra1_rdata;
          pea_row_en = 8'(1) << (cnt - 10'd1);
          pea_uop = mk_uop(PF_PASS, SRC_COL, SRC_ZERO, DST_IB1);
        end
      end
      S_FCLR: begin
        pea_en = 1'b1;
        pea_uop = mk_uop(PF_PASS, SRC_ZERO, SRC_ZERO, ph[0] ? DST_OB1 : DST_OB0);
      end
      S_FRD0: begin
        ra0_en = 1'b1; ra0_addr = SA'(c.addr_a + cnt);
      end
      S_FLOOP: begin
        pea_en = 1'b1;
        pea_row_in = '{default: dword};
        unique case (ph)
          3'd0:    pea_uop = mk_uop(PF_MUL, SRC_ROW,  SRC_IB1, DST_IB0);
          3'd1:    pea_uop = mk_uop(PF_SUB, SRC_ZERO, SRC_IB0, DST_IB0);
          3'd2:    pea_uop = mk_uop(PF_EXP, SRC_IB0,  SRC_ZERO, DST_IB0);
          3'd3:    pea_uop = mk_uop(PF_ADD, SRC_OB0,  SRC_IB0, DST_OB0);
          default: pea_uop = mk_uop(PF_MAC, SRC_ROW,  SRC_IB0, DST_OB1);
        endcase
      end
      S_FFIN: begin
        pea_en = 1'b1;
        unique case (ph)
          3'd0:    pea_uop = mk_uop(PF_DIV, SRC_OB1, SRC_OB0, DST_IB0);
          3'd1:    pea_uop = mk_uop(PF_MUL, SRC_IB0, SRC_IB1, DST_IB0);
          3'd2:    pea_uop = mk_uop(PF_LOG, SRC_OB0, SRC_ZERO, DST_OB1);
          default: pea_uop = mk_uop(PF_ADD, SRC_OB1, SRC_IB0, DST_OB0);
        endcase
      end
      S_FOUT: begin
        pea_rd_row = cnt[2:0];
      end
      S_QLD: begin
        if (cnt < 10'd8) begin rb0_en = 1'b1; rb0_addr = SA'(c.addr_a + cnt); end
        if (cnt >= 10'd1 && cnt <= 10'd8) begin
          rb1_we = 1'b1; rb1_waddr = ~cnt[0]; rb1_wdata = rb0_rdata;
        end
        if (cnt >= 10'd2) begin
          rb1_raddr = cnt[0];
          peb_en = 1'b1; peb_col_in = rb1_rdata;
          peb_row_en = 8'(1) << (cnt - 10'd2);
          peb_uop = mk_uop(PF_PASS, SRC_COL, SRC_ZERO, DST_IB0);
        end
      end
      S_QCMP: begin
        peb_en = 1'b1;
        peb_uop = ph[0] ? mk_uop(PF_RECIP, SRC_IB0, SRC_ZERO, DST_OB0)
                        : mk_uop(PF_ADD, SRC_IB0, SRC_ONE, DST_IB0);
      end
      S_QDRAIN: begin
        peb_rd_row = cnt[2:0];
        rb2_en = 1'b1; rb2_we = 1'b1; rb2_addr = SA'(c.addr_b + cnt); rb2_wdata = peb_rd_data;
      end
      S_TSUM: begin
        te_acc_clr = (cnt == 10'd0);
        if (cnt < c.len) begin rb2_en = 1'b1; rb2_addr = SA'(c.addr_a + cnt); end
        if (cnt >= 10'd1 && cnt <= c.len) begin
          te_acc_en = 1'b1;
          for (int j = 0; j < 4; j++) begin te_a[j] = rb2_rdata[2*j]; te_b[j] = rb2_rdata[2*j+1]; end
        end
      end
      S_SRD: begin
        rb2_en = 1'b1; rb2_addr = SA'(c.addr_a + cnt);
      end
      S_SREQ: begin
        dq_req[2] = 1'b1; dq_we[2] = 1'b1;
        dq_addr[2] = c.dram_addr + 20'(cnt);
        dq_wdata[2] = rb2_rdata;
      end
      S_GRD: begin
        gs_clr = (cnt == 10'd0);
        rb2_en = 1'b1; rb2_addr = SA'(c.addr_a + cnt);
      end
      S_GPT: begin
        gs_valid = 1'b1;
        gs_x = rb2_rdata[{w[1:0], 1'b0}];
        gs_y = rb2_rdata[{w[1:0], 1'b1}];
      end
      S_GWR: begin
        rb0_en = 1'b1; rb0_we = 1'b1; rb0_addr = SA'(c.addr_b + cnt); rb0_wdata = gline;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0; cnt <= '0; rcv <= '0; ph <= '0; w <= '0;
      done <= 1'b0; result <= '0; result2 <= '0; fitv <= '0; gline <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          c <= cmd; cnt <= '0; rcv <= '0; ph <= '0; w <= '0;
          unique case (cmd.op)
            CMD_LOAD:  st <= S_LOAD;
            CMD_DIST:  st <= !cmd.gens[0] ? S_DCLR : (cmd.len == 0) ? S_DONE : S_DFETCH;
            CMD_MOVE:  st <= S_MOVE;
            CMD_PERP:  st <= S_PSTART;
            CMD_QNUM:  st <= S_QLD;
            CMD_TESUM: st <= S_TSUM;
            CMD_STORE: st <= S_SRD;
            CMD_GRID:  st <= (cmd.len == 10'd0) ? S_DONE : S_GRD;
            default:   st <= S_DONE;
          endcase
        end
        S_LOAD: begin
          if (dq_gnt[0]) cnt <= cnt + 1'b1;
          if (dq_rvalid[0]) begin
            rcv <= rcv + 1'b1;
            if (rcv + 1'b1 == c.len) st <= S_DONE;
          end
          if (c.len == 0) st <= S_DONE;
        end
        S_DCLR: if (ph == 3'd2) begin ph <= '0; st <= (c.len == 0) ? S_DFIN : S_DFETCH; end
                else ph <= ph + 1'b1;
        S_DFETCH: if (dq_gnt[1]) st <= S_DWAIT;
        S_DWAIT:  if (dq_rvalid[1]) st <= S_DMAC;
        S_DMAC: if (ph == 3'd2) begin
          ph <= '0; cnt <= cnt + 1'b1;
          st <= (cnt + 1'b1 != c.len) ? S_DFETCH : c.gens[1] ? S_DONE : S_DFIN;
        end else ph <= ph + 1'b1;
        S_DFIN: if (ph == 3'd2) begin ph <= '0; cnt <= '0; st <= S_DDRAIN; end
                else ph <= ph + 1'b1;
        S_DDRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == 10'd8) st <= S_DONE;
        end
        S_MOVE: begin
          cnt <= cnt + 1'b1;
          if (cnt == c.len + 10'd1) st <= S_DONE;
        end
        S_PSTART: st <= S_PWAIT;
        S_PWAIT: begin
          if (de_done) begin
            result <= de_best_ind; result2 <= de_best_abs; st <= S_DONE;
          end else if (de_fit_req) begin
            cnt <= '0; ph <= '0; st <= S_FLDB;
          end
        end
        S_FLDB: begin
          cnt <= cnt + 1'b1;
          if (cnt == 10'd4) begin cnt <= '0; st <= S_FCLR; end
        end
        S_FCLR: if (ph == 3'd1) begin ph <= '0; cnt <= '0; w <= '0; st <= S_FRD0; end
                else ph <= ph + 1'b1;
        S_FRD0: st <= S_FLOOP;
        S_FLOOP: begin
          if (ph == 3'd4) begin
            ph <= '0; w <= w + 1'b1;
            if (w == 3'd7) begin
              cnt <= cnt + 1'b1;
              st <= (cnt + 1'b1 == c.len) ? S_FFIN : S_FRD0;
            end
          end else ph <= ph + 1'b1;
        end
        S_FFIN: if (ph == 3'd3) begin ph <= '0; cnt <= '0; st <= S_FOUT; end
                else ph <= ph + 1'b1;
        S_FOUT: begin
          for (int m = 0; m < 8; m++) fitv[8*int'(cnt[1:0]) + m] <= pea_rd_data[m];
          cnt <= cnt + 1'b1;
          if (cnt == 10'd3) st <= S_FACK;
        end
        S_FACK: st <= S_PWAIT;
        S_QLD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 10'd9) begin cnt <= '0; ph <= '0; st <= S_QCMP; end
        end
        S_QCMP: if (ph == 3'd1) begin ph <= '0; cnt <= '0; st <= S_QDRAIN; end
                else ph <= ph + 1'b1;
        S_QDRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == 10'd7) st <= S_DONE;
        end
        S_TSUM: begin
          cnt <= cnt + 1'b1;
          if (cnt == c.len + 10'd1) begin result <= te_acc_c; st <= S_DONE; end
        end
        S_SRD: st <= S_SREQ;
        S_SREQ: if (dq_gnt[2]) begin
          cnt <= cnt + 1'b1;
          st <= (cnt + 1'b1 == c.len) ? S_DONE : S_SRD;
        end
        S_GRD: begin w <= '0; st <= S_GPT; end
        S_GPT: begin
          gline[{w[1:0], 1'b0}] <= fxp_t'({24'd0, gs_cell});
          gline[{w[1:0], 1'b1}] <= fxp_t'({31'd0, gs_keep});
          w <= w + 1'b1;
          if (w == 3'd3) st <= S_GWR;
        end
        S_GWR: begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == c.len) begin result <= fxp_t'(gs_n_kept); st <= S_DONE; end
          else st <= S_GRD;
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
