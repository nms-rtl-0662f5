// newton_recip: reciprocal unit of the PEB element, y = 1/x, Q16.16 in and out.
//
// The paper computes the power of -1 in PEB with Newton's method. Here |x| is normalised to
// m in [0.5, 1) by leading-one detection, the initial guess is y0 = 48/17 - 32/17*m, and ITERS
// Newton steps y <- y*(2 - m*y) follow (internal Q2.30); the result is rescaled by the
// normalisation shift and given the sign of x. x = 0 returns the largest Q16.16 value.
// The initial guess and the number of steps (3, giving better than 2^-30 relative error) are
// this design's choices. Purely combinational; the PE registers the result.
module newton_recip
  import nms_pkg::*;
#(
  parameter int unsigned ITERS = 3
) (
  input  fxp_t x,
  output fxp_t y
);
  localparam logic signed [63:0] C48_17 = 64'sd3031741621;  // 48/17 in Q30
  localparam logic signed [63:0] C32_17 = 64'sd2021161081;  // 32/17 in Q30
  localparam logic signed [63:0] TWO    = 64'sd2147483648;  // 2 in Q30

  logic [31:0]        ax;
  logic [4:0]         p;
  logic signed [63:0] m, yy, t;
  logic signed [63:0] res;
  int                 sh;

  always_comb begin
    ax = x[31] ? 32'(-x) : 32'(x);
    p = '0;
    for (int b = 0; b < 32; b++) if (ax[b]) p = 5'(b);
    sh = 29 - int'(p);
    if (sh >= 0) m = 64'(ax) <<< sh;     // leading one at bit 29: m in [0.5,1) as Q30
    else         m = 64'(ax) >>> (-sh);
    yy = C48_17 - ((C32_17 * m) >>> 30);
    for (int n = 0; n < int'(ITERS); n++) begin
      t  = TWO - ((m * yy) >>> 30);
      yy = (yy * t) >>> 30;
    end
    // 1/x = (1/m) * 2^(sh-14); result Q16 = yy(Q30) * 2^(sh-28)
    if (sh >= 28) res = (sh - 28 > 30) ? 64'sh7FFF_FFFF_FFFF : (yy <<< (sh - 28));
    else          res = yy >>> (28 - sh);
    if (ax == 0)    y = FXP_MAX;
    else if (x[31]) y = sat64(-res);
    else            y = sat64(res);
  end
endmodule
