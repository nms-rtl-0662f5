// nms_sram: the large on-chip buffers RA0, RB0 and RB2.
//
// Single-port synchronous RAM of DEPTH lines of LINE_W bits: a line is eight Q16.16 words, one
// per array row or column. Default 512 x 256 bit = 16 KB, the size printed for each buffer in
// the paper's architecture figure (its text says 64 KB; see the documentation). One access per
// cycle: with en and we the line is written; with en and !we rdata shows the line on the next
// cycle (one-cycle read latency). Written as an array so synthesis can map it to an SRAM macro.
module nms_sram #(
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned LINE_W = 256
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [LINE_W-1:0]        wdata,
  output logic [LINE_W-1:0]        rdata
);
  logic [LINE_W-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata <= mem[addr];
    end
  end
endmodule
