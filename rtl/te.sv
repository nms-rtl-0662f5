// te: tree element (TE) of the TE array.
//
// Follows the TE drawn in the paper: one comparator (a > b), add/subtract units and muxes
// give the main result c, and a second mux passes one of two payload words (a_i, b_i) to c_i
// under control of the same comparison. The operations (te_op_e) are
//   TE_ADD  c = a + b          TE_SUB c = a - b
//   TE_ABSD c = |a - b|        TE_MIN c = min(a, b)
// and for every operation c_i = (a > b) ? b_i : a_i, i.e. the payload that goes with the
// smaller of a and b (a on a tie). The sense of that mux is this design's choice; it lets the
// same element do the crossover choice "rand < CR ? mut : p", the selection step and the
// arg-min search of differential evolution. Sums saturate. Combinational.
module te
  import nms_pkg::*;
#(
  parameter int unsigned PW = 32   // payload width
) (
  input  te_op_e        op,
  input  fxp_t          a,
  input  fxp_t          b,
  input  logic [PW-1:0] ai,
  input  logic [PW-1:0] bi,
  output fxp_t          c,
  output logic [PW-1:0] ci
);
  logic gt;
  always_comb begin
    gt = (a > b);
    ci = gt ? bi : ai;
    unique case (op)
      TE_ADD:  c = fxp_add(a, b);
      TE_SUB:  c = fxp_sub(a, b);
      TE_ABSD: c = gt ? fxp_sub(a, b) : fxp_sub(b, a);
      default: c = gt ? b : a;
    endcase
  end
endmodule
