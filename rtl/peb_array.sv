// peb_array: the 8x8 PEB array, which computes the low-dimensional affinities Q and the
// gradients of the embedding.
//
// Interconnect as drawn in the paper: every row n receives one row operand row_in[n]
// broadcast from RB0 along the row (PE (n,0) .. (n,7)), and every column m receives one
// column operand col_in[m] multicast from RB1 down the column (PE (0,m) .. (7,m)). All
// elements execute the same micro-operation (SIMD); row_en masks rows that must hold their
// state (used to load different values into different rows). With uop = MAC(ROW, COL) the
// array accumulates the outer product row_in x col_in, which is the paper's output-stationary
// dataflow; with RECIP the elements produce the Student-t kernel (1 + d)^-1 used by Q.
//
// Results leave row by row, as in the figure's per-row output lines toward RB2:
// rd_data[m] = OB0 (rd_ob1 = 0) or OB1 (rd_ob1 = 1) of PE (rd_row, m), combinationally.
// Timing: one micro-operation per cycle; results visible on rd_data the cycle after.
module peb_array
  import nms_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  pe_uop_t                 uop,
  input  logic [ROWS-1:0]         row_en,
  input  fxp_t [ROWS-1:0]         row_in,
  input  fxp_t [COLS-1:0]         col_in,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  input  logic                    rd_ob1,
  output fxp_t [COLS-1:0]         rd_data
);
  fxp_t ob0 [ROWS][COLS];
  fxp_t ob1 [ROWS][COLS];

  for (genvar n = 0; n < ROWS; n++) begin : g_row
    for (genvar m = 0; m < COLS; m++) begin : g_col
      fxp_t unused_ib0, unused_ib1;
      peb u_pe (
        .clk, .rst_n, .en(en && row_en[n]), .uop,
        .row_in(row_in[n]), .col_in(col_in[m]),
        .ib0(unused_ib0), .ib1(unused_ib1), .ob0(ob0[n][m]), .ob1(ob1[n][m])
      );
    end
  end

  always_comb begin
    for (int m = 0; m < int'(COLS); m++)
      rd_data[m] = rd_ob1 ? ob1[rd_row][m] : ob0[rd_row][m];
  end
endmodule
