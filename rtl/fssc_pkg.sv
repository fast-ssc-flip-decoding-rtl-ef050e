// fssc_pkg: types and constants shared by the fast-SSC-flip decoder.
//
// The decoder is code-agnostic: the decoder tree of a polar code is compiled
// off-line into a list of instructions (one per tree operation), which the
// controller executes from an instruction memory. An instruction names the
// operation, the tree level l of the node it acts on (node length 2^l), and
// whether the node is the left or the right child of its parent (which
// partial-sum memory receives its bit estimates).
//
// Operation set: F, G and COMB are the three edges of the successive-
// cancellation tree walk; RATE0, RATE1, REP, BIREP and SPC are the dedicated
// leaf decoders of fast-SSC, with the birepetition node taking the place of
// the ML node as proposed for the flip decoder. END closes a trial.
// The numeric encoding and field widths are this design's choice.
package fssc_pkg;

  typedef enum logic [3:0] {
    OP_F     = 4'd0,  // alpha_l = f(alpha_v)          (left edge)
    OP_G     = 4'd1,  // alpha_r = g(alpha_v, beta_l)  (right edge)
    OP_COMB  = 4'd2,  // beta_v  = combine(beta_l, beta_r)
    OP_RATE0 = 4'd3,  // frozen node, beta = 0
    OP_RATE1 = 4'd4,  // information node
    OP_REP   = 4'd5,  // repetition node
    OP_BIREP = 4'd6,  // birepetition node
    OP_SPC   = 4'd7,  // single-parity-check node
    OP_END   = 4'd15  // end of the tree walk
  } op_e;

  typedef struct packed {
    op_e        op;
    logic [3:0] level;  // node level l, node length 2^l
    logic       left;   // 1: node is a left child (or the root)
  } instr_t;

  // Saturate a signed value to the symmetric range [-(2^(w-1)-1), 2^(w-1)-1].
  // Used on 32-bit intermediates; the caller truncates to w bits.
  function automatic int sat_sym(input int v, input int w);
    int lim;
    lim = (1 << (w - 1)) - 1;
    if (v > lim) return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

  // Saturate a non-negative value to w unsigned bits.
  function automatic int sat_u(input int v, input int w);
    int lim;
    lim = (1 << w) - 1;
    if (v > lim) return lim;
    if (v < 0) return 0;
    return v;
  endfunction

endpackage
