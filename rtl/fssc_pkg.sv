// fssc_pkg: shared constants, types and arithmetic of the Fast-SSC polar decoder.
//
// LLRs are fixed point with one fractional bit. Internal LLRs use QI = 6 bits,
// channel LLRs QC = 5 bits (the 6.5.1 quantization of the paper). A positive
// LLR favours bit 0. All saturating arithmetic clips symmetrically to
// [-(2^(QI-1)-1), 2^(QI-1)-1] so that the magnitude of any stored LLR fits in
// QI-1 bits; the clipping rule is this design's choice.
//
// f_op is the min-sum F of successive cancellation, g_op the G operation
// (right-child LLR given the left child's bit). The instruction word and the
// opcodes form this design's own program format: one instruction per node
// operation of the Fast-SSC decoder tree, carrying the node length as log2(Nv),
// the bank (left or right child) its bit estimates go to, and a last flag.
package fssc_pkg;

  localparam int QI = 6;            // internal LLR width
  localparam int QC = 5;            // channel LLR width
  localparam int QF = 1;            // fractional bits (same in both)
  localparam int LLR_MAX = (1 << (QI - 1)) - 1;

  typedef logic signed [QI-1:0] llr_t;
  typedef logic signed [QC-1:0] chllr_t;

  // Node operations. Leaves (REP..0REPSPC) finish in one cycle; F, G, G0R,
  // COMB, COMB0R and R1 take ceil(Nv/P) cycles; RSPC and 0SPC take that plus 4.
  typedef enum logic [3:0] {
    OP_F       = 4'd0,   // alpha_l = F(alpha_v)
    OP_G       = 4'd1,   // alpha_r = G(alpha_v, beta_l)
    OP_G0R     = 4'd2,   // alpha_r = G(alpha_v, 0)
    OP_COMB    = 4'd3,   // beta_v  = Combine(beta_l, beta_r)
    OP_COMB0R  = 4'd4,   // beta_v  = Combine(0, beta_r)
    OP_R1      = 4'd5,   // G, Sign, Combine: right child is rate 1
    OP_RSPC    = 4'd6,   // G, SPC, Combine: right child is an SPC code
    OP_0SPC    = 4'd7,   // G0R, SPC, Combine0R
    OP_REP     = 4'd8,   // repetition leaf, Nv = 4..32
    OP_REP1    = 4'd9,   // Rep1 leaf, Nv = 8
    OP_REPSPC  = 4'd10,  // RepSPC leaf, Nv = 8
    OP_01      = 4'd11,  // 01 leaf, Nv = 4
    OP_001     = 4'd12,  // G0R, 01, Combine0R, Nv = 8
    OP_0REPSPC = 4'd13   // G0R, RepSPC, Combine0R, Nv = 16
  } opcode_e;

  typedef struct packed {
    logic       last;    // final instruction of the program
    logic       side;    // bit estimates go to the right-child bank (1) or left (0)
    logic [3:0] log2nv;  // node length Nv = 2**log2nv
    opcode_e    op;
  } instr_t;

  function automatic llr_t sat(input logic signed [QI+1:0] v);
    localparam logic signed [QI+1:0] HI = (QI+2)'(LLR_MAX);
    if (v > HI) return llr_t'(HI);
    if (v < -HI) return llr_t'(-HI);
    return llr_t'(v);
  endfunction

  function automatic logic [QI-1:0] mag(input llr_t v);
    return v[QI-1] ? QI'(-v) : QI'(v);
  endfunction

  // F(a, b) = sgn(a) sgn(b) min(|a|, |b|)
  function automatic llr_t f_op(input llr_t a, input llr_t b);
    logic [QI-1:0] m;
    m = (mag(a) < mag(b)) ? mag(a) : mag(b);
    return (a[QI-1] ^ b[QI-1]) ? llr_t'(-$signed(m)) : llr_t'($signed(m));
  endfunction

  // G(a, b, beta) = b + a when beta = 0, b - a otherwise
  function automatic llr_t g_op(input llr_t a, input llr_t b, input logic beta);
    logic signed [QI+1:0] s;
    s = beta ? (QI+2)'(b) - (QI+2)'(a) : (QI+2)'(b) + (QI+2)'(a);
    return sat(s);
  endfunction

  function automatic logic hard(input llr_t v);
    return v[QI-1];
  endfunction

endpackage
