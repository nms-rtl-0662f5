// fxp_div: divider of the PEA and PEB elements, q = a / b in Q16.16.
//
// The paper only draws a divide unit in both element types. This one pre-shifts the dividend
// by the 16 fraction bits and divides in 64 bits, truncating toward zero and saturating to the
// Q16.16 range; b = 0 returns the largest value of a's sign. Combinational; the PE registers
// the quotient.
module fxp_div
  import nms_pkg::*;
(
  input  fxp_t a,
  input  fxp_t b,
  output fxp_t q
);
  logic signed [63:0] num, quo;
  always_comb begin
    num = 64'(a) <<< FW;
    quo = (b == 0) ? 64'sd0 : num / 64'(b);
    if (b == 0) q = a[31] ? FXP_MIN : FXP_MAX;
    else        q = sat64(quo);
  end
endmodule
