// dram_arb: the arbiter ("Arb") between the stacked DRAM dies and the sampling circuit.
//
// NREQ on-chip requesters (RA0 fill, RA1 column stream, RB2 write-back in the top) share one
// DRAM line port. Each requester holds req (with we, addr, wdata) until it sees gnt. The
// arbiter grants one requester per cycle in round-robin order, starting after the last
// winner, and only when the DRAM port is ready. A read carries the winner's number as tag;
// the DRAM returns it with the data (d_rvalid, d_rtag) and the arbiter routes rvalid/rdata to
// that requester. The paper only names the arbiter; round robin and tag routing are this
// design's choices.
module dram_arb #(
  parameter int unsigned NREQ   = 3,
  parameter int unsigned AW     = 20,
  parameter int unsigned LINE_W = 256,
  localparam int unsigned TW    = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // requesters
  input  logic [NREQ-1:0]              req,
  input  logic [NREQ-1:0]              we,
  input  logic [NREQ-1:0][AW-1:0]      addr,
  input  logic [NREQ-1:0][LINE_W-1:0]  wdata,
  output logic [NREQ-1:0]              gnt,
  output logic [NREQ-1:0]              rvalid,
  output logic [LINE_W-1:0]            rdata,
  // DRAM side
  output logic                         d_req,
  output logic                         d_we,
  output logic [AW-1:0]                d_addr,
  output logic [LINE_W-1:0]            d_wdata,
  output logic [TW-1:0]                d_tag,
  input  logic                         d_ready,
  input  logic                         d_rvalid,
  input  logic [TW-1:0]                d_rtag,
  input  logic [LINE_W-1:0]            d_rdata
);
  logic [TW-1:0] last_q, win;
  logic          any;

  always_comb begin
    any = 1'b0;
    win = last_q;
    for (int o = 1; o <= int'(NREQ); o++) begin
      int unsigned idx;
      idx = (int'(last_q) + o) % NREQ;
      if (!any && req[idx]) begin
        any = 1'b1;
        win = TW'(idx);
      end
    end
    gnt     = '0;
    if (any && d_ready) gnt[win] = 1'b1;
    d_req   = any;
    d_we    = we[win];
    d_addr  = addr[win];
    d_wdata = wdata[win];
    d_tag   = win;
    rvalid  = '0;
    if (d_rvalid) rvalid[d_rtag] = 1'b1;
    rdata   = d_rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              last_q <= TW'(NREQ - 1);
    else if (any && d_ready) last_q <= win;
  end

  // a grant is only given to a requester that asks, and at most one at a time
  a_gnt_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_gnt_req:    assert property (@(posedge clk) disable iff (!rst_n) (gnt & ~req) == '0);
endmodule
