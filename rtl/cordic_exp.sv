// cordic_exp: exponential unit of the PEA element, y = exp(x), Q16.16 in and out.
//
// The paper names a CORDIC exponential inside every PEA. This unit does it in three steps:
//   1. range reduction  x = k*ln2 + r, with k = floor(x/ln2) and 0 <= r < ln2;
//   2. hyperbolic CORDIC in rotation mode on r (internal Q3.28): starting from
//      (x0, y0, z0) = (1/K, 0, r) the iterations i = 1..16, with i = 4 and 13 repeated for
//      convergence, drive z to 0 and leave x = cosh r, y = sinh r, so exp(r) = x + y;
//   3. scaling by 2^k with saturation.
// Inputs above ~10.397 saturate to the largest Q16.16 value; inputs below -12 give 0.
// Purely combinational (the iterations are unrolled); the surrounding PE registers the result,
// so one exponential takes one PE cycle. The unrolled, unpipelined form is this design's choice.
module cordic_exp
  import nms_pkg::*;
(
  input  fxp_t x,
  output fxp_t y
);
  localparam int NIT = 18;
  localparam int unsigned ITS [NIT] = '{1,2,3,4,4,5,6,7,8,9,10,11,12,13,13,14,15,16};
  // atanh(2^-i) in Q3.28, i = 1..16
  localparam logic signed [31:0] ATANH [16] = '{
    32'sd147453245, 32'sd68561855, 32'sd33730852, 32'sd16799113, 32'sd8391340, 32'sd4194645,
    32'sd2097195,   32'sd1048581,  32'sd524289,   32'sd262144,   32'sd131072,  32'sd65536,
    32'sd32768,     32'sd16384,    32'sd8192,     32'sd4096 };
  localparam logic signed [31:0] INV_K   = 32'sd324135026;   // 1/K_hyperbolic in Q3.28
  localparam logic signed [63:0] LN2_Q28 = 64'sd186065279;
  localparam logic signed [63:0] INVLN2_Q30 = 64'sd1549082005;
  localparam fxp_t X_HI = 32'sh000A_65AF;                     // ~10.3972 = ln(32768)
  localparam fxp_t X_LO = -32'sh000C_0000;                    // -12

  logic signed [63:0] prod;
  logic signed [31:0] k;
  logic signed [63:0] r64;
  logic signed [31:0] cx [NIT+1];
  logic signed [31:0] cy [NIT+1];
  logic signed [31:0] cz [NIT+1];
  logic signed [63:0] er;          // exp(r) in Q28, 1 <= er < 2
  logic signed [63:0] scaled;

  always_comb begin
    prod = 64'(x) * INVLN2_Q30;                 // Q46
    k    = 32'(prod >>> 46);                    // floor(x / ln2)
    r64  = (64'(x) <<< 12) - 64'(k) * LN2_Q28;  // remainder in Q28
    cx[0] = INV_K;
    cy[0] = '0;
    cz[0] = 32'(r64);
    for (int n = 0; n < NIT; n++) begin
      if (cz[n] >= 0) begin
        cx[n+1] = cx[n] + (cy[n] >>> ITS[n]);
        cy[n+1] = cy[n] + (cx[n] >>> ITS[n]);
        cz[n+1] = cz[n] - ATANH[ITS[n]-1];
      end else begin
        cx[n+1] = cx[n] - (cy[n] >>> ITS[n]);
        cy[n+1] = cy[n] - (cx[n] >>> ITS[n]);
        cz[n+1] = cz[n] + ATANH[ITS[n]-1];
      end
    end
    er = 64'(cx[NIT]) + 64'(cy[NIT]);
    // result Q16 = er * 2^k / 2^12
    if (k >= 12) scaled = er <<< (k - 12);
    else         scaled = er >>> (12 - k);
    if (x > X_HI)      y = FXP_MAX;
    else if (x < X_LO) y = '0;
    else               y = sat64(scaled);
  end
endmodule
