// vbuf: the 64-byte staging buffers RA1, RA2 and RB1.
//
// LINES lines of eight Q16.16 words (default 2 x 32 B = 64 B, the size in the paper). RA1
// holds the column operands multicast into the PEA array (with the Rand generator beside it),
// RA2 collects PEA result rows on their way to RB0 and the TE array, RB1 holds PEB column
// operands. Write: we, waddr, wdata at the clock edge. Read: rdata = line raddr,
// combinational, so a line written in one cycle can be used in the next.
// The paper marks RA1 and RA2 with a transpose (.)^T; with two 8-word lines this design
// does not model a transposed read (see the documentation).
module vbuf
  import nms_pkg::*;
#(
  parameter int unsigned LINES = 2
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [$clog2(LINES)-1:0]   waddr,
  input  line_t                      wdata,
  input  logic [$clog2(LINES)-1:0]   raddr,
  output line_t                      rdata
);
  line_t mem [LINES];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(LINES); l++) mem[l] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end
  assign rdata = mem[raddr];
endmodule
