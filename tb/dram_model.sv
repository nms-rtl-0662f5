// dram_model: behavioural model of the stacked DRAM as seen through its line port, for
// testbenches only (kind: behavioural model). The paper's DRAM dies, their peripheral logic
// and the through-silicon buses are not designed in the paper and are not logic of this
// design; this model stands in for all three.
// A request (d_req with d_ready) is taken per cycle. A write stores d_wdata at line d_addr at
// once; a read returns the line LAT cycles later with d_rvalid and the request's tag. d_ready
// drops for one cycle out of every STALL_EVERY (0: never), so that requesters see stalls;
// n_stall counts the cycles in which a request waited for that reason.
module dram_model
  import nms_pkg::*;
#(
  parameter int unsigned LINES       = 1024,
  parameter int unsigned LAT         = 4,
  parameter int unsigned STALL_EVERY = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        d_req,
  input  logic        d_we,
  input  logic [19:0] d_addr,
  input  line_t       d_wdata,
  input  logic [1:0]  d_tag,
  output logic        d_ready,
  output logic        d_rvalid,
  output logic [1:0]  d_rtag,
  output line_t       d_rdata,
  output int          n_stall
);
  line_t mem [LINES];
  logic  pv [LAT];
  logic [1:0] pt [LAT];
  line_t pd [LAT];
  int cyc;

  assign d_ready  = (STALL_EVERY == 0) || (cyc % STALL_EVERY != STALL_EVERY - 1);
  assign d_rvalid = pv[LAT-1];
  assign d_rtag   = pt[LAT-1];
  assign d_rdata  = pd[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0; n_stall <= 0;
      for (int i = 0; i < LAT; i++) begin pv[i] <= 1'b0; pt[i] <= '0; pd[i] <= '0; end
    end else begin
      cyc <= cyc + 1;
      if (d_req && !d_ready) n_stall <= n_stall + 1;
      for (int i = LAT - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pt[i] <= pt[i-1]; pd[i] <= pd[i-1]; end
      pv[0] <= d_req && d_ready && !d_we;
      pt[0] <= d_tag;
      pd[0] <= mem[d_addr % LINES];
      if (d_req && d_ready && d_we) mem[d_addr % LINES] <= d_wdata;
    end
  end
endmodule
