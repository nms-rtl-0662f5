// nms_pkg: types and constants shared by the DE-SNE near-memory sampling circuit.
//
// Every datapath word is a signed 32-bit fixed-point number with 16 fraction bits (Q16.16).
// The number format is a choice of this implementation: the DE-SNE circuit's own precision is
// not stated (the only precision given, FP8, belongs to the combined sampling + training system).
// A buffer line is eight words, one per row or column of the 8x8 processing-element arrays.
//
// The package also holds the micro-operation encoding shared by the PEA and PEB elements, the
// operation codes of the tree element (TE), the host command format, and fixed-point helpers.
package nms_pkg;

  localparam int unsigned DW     = 32;           // datapath word width
  localparam int unsigned FW     = 16;           // fraction bits
  localparam int unsigned NLANE  = 8;            // words per buffer line = array side
  localparam int unsigned LINE_W = DW * NLANE;   // 256-bit buffer line

  typedef logic signed [DW-1:0] fxp_t;
  typedef fxp_t [NLANE-1:0]     line_t;

  localparam fxp_t FXP_ONE = 32'sh0001_0000;
  localparam fxp_t FXP_MAX = 32'sh7FFF_FFFF;
  localparam fxp_t FXP_MIN = 32'sh8000_0000;

  // ---------------- tree element ----------------
  typedef enum logic [1:0] {
    TE_ADD  = 2'd0,   // c = a + b
    TE_SUB  = 2'd1,   // c = a - b
    TE_ABSD = 2'd2,   // c = |a - b|  (a>b ? a-b : b-a)
    TE_MIN  = 2'd3    // c = smaller of a and b
  } te_op_e;

  // ---------------- processing-element micro-operation ----------------
  typedef enum logic [3:0] {
    PF_NOP   = 4'd0,
    PF_PASS  = 4'd1,  // dst = A
    PF_ADD   = 4'd2,  // dst = A + B
    PF_SUB   = 4'd3,  // dst = A - B
    PF_MUL   = 4'd4,  // dst = A * B
    PF_MAC   = 4'd5,  // dst = dst + A * B
    PF_SHR   = 4'd6,  // dst = A >>> shamt
    PF_DIV   = 4'd7,  // dst = A / B
    PF_LOG   = 4'd8,  // dst = ln(A)      (PEA only)
    PF_EXP   = 4'd9,  // dst = exp(A)     (PEA only)
    PF_RECIP = 4'd10  // dst = 1 / A      (PEB only)
  } pe_func_e;

  typedef enum logic [2:0] {
    SRC_ROW  = 3'd0,  // row operand, broadcast along the row
    SRC_COL  = 3'd1,  // column operand, multicast down the column
    SRC_IB0  = 3'd2,  // input buffer word 0
    SRC_IB1  = 3'd3,  // input buffer word 1
    SRC_OB0  = 3'd4,  // output buffer word 0
    SRC_OB1  = 3'd5,  // output buffer word 1
    SRC_ZERO = 3'd6,
    SRC_ONE  = 3'd7
  } pe_src_e;

  typedef enum logic [1:0] {
    DST_IB0 = 2'd0, DST_IB1 = 2'd1, DST_OB0 = 2'd2, DST_OB1 = 2'd3
  } pe_dst_e;

  typedef struct packed {
    pe_func_e   func;
    pe_src_e    src_a;
    pe_src_e    src_b;
    pe_dst_e    dst;
    logic [4:0] shamt;
  } pe_uop_t;

  localparam pe_uop_t UOP_NOP = '{func: PF_NOP, src_a: SRC_ZERO, src_b: SRC_ZERO, dst: DST_IB0, shamt: 5'd0};

  function automatic pe_uop_t mk_uop(pe_func_e f, pe_src_e a, pe_src_e b, pe_dst_e d);
    pe_uop_t u;
    u.func = f; u.src_a = a; u.src_b = b; u.dst = d; u.shamt = 5'd0;
    return u;
  endfunction

  // ---------------- host commands ----------------
  typedef enum logic [2:0] {
    CMD_LOAD  = 3'd0,  // DRAM -> RA0 (dst_sel=0) or RB0 (dst_sel=1), len lines
    CMD_DIST  = 3'd1,  // squared-distance tile on the PEA array, Fig. 9 dataflow, result -> RB0
    CMD_PERP  = 3'd2,  // DE perplexity search for one distance row held in RB0
    CMD_QNUM  = 3'd3,  // PEB array: (1 + d)^-1 of 8 RB0 lines -> RB2
    CMD_TESUM = 3'd4,  // TE tree: sum of len RB2 lines -> result
    CMD_STORE = 3'd5,  // RB2 -> DRAM, len lines
    CMD_MOVE  = 3'd6,  // RB0 -> RA2 -> RA0, len lines
    CMD_GRID  = 3'd7   // RB2 2-D points -> grid sampler -> RB0 cell/keep lines
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic        dst_sel;
    logic [19:0] dram_addr;  // DRAM line address
    logic [9:0]  addr_a;     // first source/destination line in an on-chip buffer
    logic [9:0]  addr_b;     // second on-chip line address
    logic [9:0]  len;        // lines (LOAD/STORE/TESUM/PERP/MOVE), features K (DIST)
    logic [15:0] gens;       // DE generations (PERP)
    logic [31:0] seed;       // Rand seed (PERP)
    fxp_t        arg0;       // PERP: target entropy ln(perplexity)
    fxp_t        arg1;       // PERP: lower bound of beta
    fxp_t        arg2;       // PERP: upper bound of beta
  } cmd_t;

  // ---------------- fixed-point helpers ----------------
  function automatic fxp_t sat64(logic signed [63:0] v);
    if (v > 64'sd2147483647)       return FXP_MAX;
    else if (v < -64'sd2147483648) return FXP_MIN;
    else                           return fxp_t'(v);
  endfunction

  function automatic fxp_t fxp_mul(fxp_t a, fxp_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return sat64(p >>> FW);
  endfunction

  function automatic fxp_t fxp_add(fxp_t a, fxp_t b);
    return sat64(64'(a) + 64'(b));
  endfunction

  function automatic fxp_t fxp_sub(fxp_t a, fxp_t b);
    return sat64(64'(a) - 64'(b));
  endfunction

endpackage
