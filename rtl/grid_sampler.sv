// grid_sampler: gridding of the low-dimensional manifold space and per-cell_id random sampling,
// the last two steps of the DE-SNE sampling scheme (embed, grid, sample).
//
// Each 2-D embedded point (x, y) is placed in a square cell_id of a GRID x GRID grid anchored at
// (x0, y0) with cells 2^shift LSBs wide (cell number ((y - y0) >> shift) * GRID + ((x - x0) >> shift),
// coordinates clamped to the grid). The point is kept when a random number rnd is at most thr
// (keep probability (thr + 1) / 2^16) and its cell_id has kept fewer than quota points so far, so
// every occupied cell_id contributes samples and none contributes more than quota: the coverage
// the gridding is for. clr empties all cell_id counters and the kept count.
// Interface: one point per cycle (valid, x, y); cell_id and keep are combinational for the point
// on the inputs; the cell_id counter and n_kept update at the clock edge.
// The paper gives only the steps ("a certain number of representative samples are randomly
// selected within each grid"); the grid size, the power-of-two cells, the quota and the
// probability filter are this design's choices.
module grid_sampler
  import nms_pkg::*;
#(
  parameter int unsigned GRID = 16,      // cells per axis
  parameter int unsigned CW   = 8,       // cell counter width
  localparam int unsigned GB  = $clog2(GRID)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              valid,
  input  fxp_t              x,
  input  fxp_t              y,
  input  fxp_t              x0,
  input  fxp_t              y0,
  input  logic [4:0]        shift,
  input  logic [CW-1:0]     quota,
  input  logic [15:0]       thr,
  input  logic [15:0]       rnd,
  output logic [2*GB-1:0]   cell_id,
  output logic              keep,
  output logic [31:0]       n_kept
);
  logic [CW-1:0] cnt_q [GRID*GRID];

  function automatic logic [GB-1:0] coord(fxp_t v, fxp_t o, logic [4:0] sh);
    fxp_t d;
    d = fxp_sub(v, o);
    if (d < 0) return '0;
    d = d >>> sh;
    if (d >= fxp_t'(GRID)) return GB'(GRID - 1);
    return d[GB-1:0];
  endfunction

  always_comb begin
    cell_id = {coord(y, y0, shift), coord(x, x0, shift)};
    keep = valid && (rnd <= thr) && (cnt_q[cell_id] < quota);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(GRID * GRID); k++) cnt_q[k] <= '0;
      n_kept <= '0;
    end else if (clr) begin
      for (int k = 0; k < int'(GRID * GRID); k++) cnt_q[k] <= '0;
      n_kept <= '0;
    end else if (keep) begin
      cnt_q[cell_id] <= cnt_q[cell_id] + 1'b1;
      n_kept      <= n_kept + 32'd1;
    end
  end
endmodule
