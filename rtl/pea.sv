// pea: processing element A (PEA) of the 8x8 PEA array.
//
// As drawn in the paper, a PEA holds an 8-byte input buffer, a crossbar, a multiplier, an
// adder with a feedback mux (multiply-accumulate), a register, a right shifter, a divider,
// a CORDIC logarithm, a CORDIC exponential and an 8-byte output buffer. Here the 8-byte
// buffers are two 32-bit words each: IB0/IB1 and OB0/OB1.
//
// Each cycle with en high the element executes one micro-operation (pe_uop_t): the crossbar
// picks operand A and B from {row operand, column operand, IB0, IB1, OB0, OB1, 0, 1}, the
// function unit selected by uop.func computes, and the result is written into uop.dst at the
// clock edge. PF_MAC adds A*B to the current value of dst. PF_RECIP is not a PEA function
// and leaves dst unchanged. Latency: one cycle for every function.
// The micro-operation format, the single-cycle timing and the Q16.16 format are this
// design's choices; the set of function units is the paper's.
module pea
  import nms_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  pe_uop_t uop,
  input  fxp_t    row_in,
  input  fxp_t    col_in,
  output fxp_t    ib0,
  output fxp_t    ib1,
  output fxp_t    ob0,
  output fxp_t    ob1
);
  fxp_t ib0_q, ib1_q, ob0_q, ob1_q;
  fxp_t opa, opb, dcur, res, q_div, q_log, q_exp;

  function automatic fxp_t pick(pe_src_e s, fxp_t r, fxp_t c, fxp_t i0, fxp_t i1, fxp_t o0, fxp_t o1);
    unique case (s)
      SRC_ROW:  return r;
      SRC_COL:  return c;
      SRC_IB0:  return i0;
      SRC_IB1:  return i1;
      SRC_OB0:  return o0;
      SRC_OB1:  return o1;
      SRC_ZERO: return '0;
      default:  return FXP_ONE;
    endcase
  endfunction

  fxp_div    u_div (.a(opa), .b(opb), .q(q_div));
  cordic_log u_log (.x(opa), .y(q_log));
  cordic_exp u_exp (.x(opa), .y(q_exp));

  always_comb begin
    opa = pick(uop.src_a, row_in, col_in, ib0_q, ib1_q, ob0_q, ob1_q);
    opb = pick(uop.src_b, row_in, col_in, ib0_q, ib1_q, ob0_q, ob1_q);
    unique case (uop.dst)
      DST_IB0: dcur = ib0_q;
      DST_IB1: dcur = ib1_q;
      DST_OB0: dcur = ob0_q;
      default: dcur = ob1_q;
    endcase
    unique case (uop.func)
      PF_PASS: res = opa;
      PF_ADD:  res = fxp_add(opa, opb);
      PF_SUB:  res = fxp_sub(opa, opb);
      PF_MUL:  res = fxp_mul(opa, opb);
      PF_MAC:  res = fxp_add(dcur, fxp_mul(opa, opb));
      PF_SHR:  res = opa >>> uop.shamt;
      PF_DIV:  res = q_div;
      PF_LOG:  res = q_log;
      PF_EXP:  res = q_exp;
      default: res = dcur;           // PF_NOP, PF_RECIP
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ib0_q <= '0; ib1_q <= '0; ob0_q <= '0; ob1_q <= '0;
    end else if (en && uop.func != PF_NOP) begin
      unique case (uop.dst)
        DST_IB0: ib0_q <= res;
        DST_IB1: ib1_q <= res;
        DST_OB0: ob0_q <= res;
        default: ob1_q <= res;
      endcase
    end
  end

  assign ib0 = ib0_q;
  assign ib1 = ib1_q;
  assign ob0 = ob0_q;
  assign ob1 = ob1_q;
endmodule
