// cordic_log: logarithm unit of the PEA element, y = ln(x), Q16.16 in and out.
//
// The paper names a CORDIC logarithm inside every PEA. This unit normalises x = m * 2^e with
// 1 <= m < 2 (leading-one detection), then runs hyperbolic CORDIC in vectoring mode on
// (x0, y0, z0) = (m+1, m-1, 0); driving y to 0 leaves z = atanh((m-1)/(m+1)) = ln(m)/2.
// The result is 2z + e*ln2. Internal words are Q3.28; iterations i = 1..16 with 4 and 13
// repeated. A non-positive input returns the most negative Q16.16 value.
// Purely combinational; the PE registers the result (one PE cycle per logarithm).
module cordic_log
  import nms_pkg::*;
(
  input  fxp_t x,
  output fxp_t y
);
  localparam int NIT = 18;
  localparam int unsigned ITS [NIT] = '{1,2,3,4,4,5,6,7,8,9,10,11,12,13,13,14,15,16};
  localparam logic signed [31:0] ATANH [16] = '{
    32'sd147453245, 32'sd68561855, 32'sd33730852, 32'sd16799113, 32'sd8391340, 32'sd4194645,
    32'sd2097195,   32'sd1048581,  32'sd524289,   32'sd262144,   32'sd131072,  32'sd65536,
    32'sd32768,     32'sd16384,    32'sd8192,     32'sd4096 };
  localparam logic signed [63:0] LN2_Q28 = 64'sd186065279;

  logic [4:0]         p;       // index of the leading one
  logic signed [31:0] m;       // mantissa in Q28
  logic signed [31:0] cx [NIT+1];
  logic signed [31:0] cy [NIT+1];
  logic signed [31:0] cz [NIT+1];
  logic signed [63:0] res28;

  always_comb begin
    p = '0;
    for (int b = 0; b < 31; b++) if (x[b]) p = 5'(b);
    if (p <= 5'd28) m = 32'(x) <<< (5'd28 - p);
    else            m = 32'(x) >>> (p - 5'd28);
    cx[0] = m + (32'sd1 <<< 28);
    cy[0] = m - (32'sd1 <<< 28);
    cz[0] = '0;
    for (int n = 0; n < NIT; n++) begin
      if (cy[n] < 0) begin
        cx[n+1] = cx[n] + (cy[n] >>> ITS[n]);
        cy[n+1] = cy[n] + (cx[n] >>> ITS[n]);
        cz[n+1] = cz[n] - ATANH[ITS[n]-1];
      end else begin
        cx[n+1] = cx[n] - (cy[n] >>> ITS[n]);
        cy[n+1] = cy[n] - (cx[n] >>> ITS[n]);
        cz[n+1] = cz[n] + ATANH[ITS[n]-1];
      end
    end
    res28 = 2 * 64'(cz[NIT]) + (64'(signed'({1'b0, p})) - 64'sd16) * LN2_Q28;
    if (x <= 0) y = FXP_MIN;
    else        y = sat64(res28 >>> 12);
  end
endmodule
