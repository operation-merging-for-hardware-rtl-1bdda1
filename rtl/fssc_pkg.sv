// fssc_pkg: types, opcodes and arithmetic shared by the Fast-SSC decoder.
//
// LLRs use the Q(6,5,1) quantisation: internal LLRs are 6-bit two's complement,
// channel LLRs are 5-bit, both with one fractional bit (the binary point is only
// a convention; the hardware treats them as integers). Internal values saturate
// symmetrically to +/-31 (a choice of this design) so that |x| always fits in
// five bits.
//
// The instruction set is the Fast-SSC list (F, G, G0, C, C0, P-R1, P-01,
// P-RSPC, P-0SPC, ML, Rep, RepSPC) plus the merged operations F x2, G0 x2,
// C x2/x3, C0 x2/x3, G-F, F-G0, F-Rep, Rep-RepSPC, Rep-Rate1 and Rate0-ML.
// SPC (a stand-alone SPC leaf) and END (stop) are additions of this design.
//
// An instruction names the tree stage S of the node it works on (the parent
// node for branch operations, the node itself for leaves) and the partial-sum
// unit (0: left child result, 1: right child result) its beta output goes to.
package fssc_pkg;

  localparam int QI = 6;           // internal LLR width
  localparam int QC = 5;           // channel LLR width
  localparam int LLR_MAX = (1 << (QI - 1)) - 1;

  typedef logic signed [QI-1:0] llr_t;
  typedef logic signed [QC-1:0] chllr_t;

  typedef enum logic [4:0] {
    OP_END      = 5'd0,
    OP_F        = 5'd1,
    OP_G        = 5'd2,
    OP_G0       = 5'd3,
    OP_C        = 5'd4,
    OP_C0       = 5'd5,
    OP_PR1      = 5'd6,
    OP_P01      = 5'd7,
    OP_PRSPC    = 5'd8,
    OP_P0SPC    = 5'd9,
    OP_ML       = 5'd10,
    OP_REP      = 5'd11,
    OP_REPSPC   = 5'd12,
    OP_SPC      = 5'd13,
    OP_F2       = 5'd14,
    OP_G02      = 5'd15,
    OP_C2       = 5'd16,
    OP_C3       = 5'd17,
    OP_C02      = 5'd18,
    OP_C03      = 5'd19,
    OP_GF       = 5'd20,
    OP_FG0      = 5'd21,
    OP_FREP     = 5'd22,
    OP_REPREPSPC= 5'd23,
    OP_REPRATE1 = 5'd24,
    OP_RATE0ML  = 5'd25
  } op_e;

  typedef struct packed {
    op_e        op;
    logic [3:0] stage;
    logic       dst;
  } instr_t;

  function automatic llr_t sat(input logic signed [QI:0] v);
    if (int'(v) > LLR_MAX)       return llr_t'(LLR_MAX);
    else if (int'(v) < -LLR_MAX) return llr_t'(-LLR_MAX);
    else                   return llr_t'(v);
  endfunction

  function automatic logic [QI-2:0] mag(input llr_t a);
    logic [QI-1:0] m;
    m = a[QI-1] ? -a : a;
    return (int'(m) > LLR_MAX) ? (QI-1)'(LLR_MAX) : m[QI-2:0];
  endfunction

  // Eq. (1): min-sum left-child LLR
  function automatic llr_t f_op(input llr_t a, input llr_t b);
    logic [QI-2:0] ma, mb, m;
    ma = mag(a);
    mb = mag(b);
    m  = (ma < mb) ? ma : mb;
    return (a[QI-1] ^ b[QI-1]) ? -llr_t'({1'b0, m}) : llr_t'({1'b0, m});
  endfunction

  // Eq. (2): right-child LLR, b + (1-2*beta)*a, saturated
  function automatic llr_t g_op(input llr_t a, input llr_t b, input logic beta);
    logic signed [QI:0] s;
    s = beta ? (QI+1)'(b) - (QI+1)'(a) : (QI+1)'(b) + (QI+1)'(a);
    return sat(s);
  endfunction

  // Eq. (5) / (7): hard decision, 1 for a negative LLR
  function automatic logic hd(input llr_t a);
    return a[QI-1];
  endfunction

  function automatic llr_t ch2llr(input chllr_t c);
    return llr_t'(c);
  endfunction

  // Offset of the low-stage field of stage s inside a packed 2*PE word
  // (stage log2(PE) at 0, then each lower stage directly after the one above).
  function automatic int lo_off(input int pe, input int s);
    return 2 * pe - (1 << (s + 1));
  endfunction

endpackage
