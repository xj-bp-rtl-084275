// xjbp_pkg: types, constants and arithmetic shared by the XJ-BP polar decoder.
//
// Messages are log-likelihood ratios (LLRs) held as saturating two's-complement
// numbers of LLR_W bits, in the symmetric range [-LLR_MAX, +LLR_MAX]; +LLR_MAX
// stands for the "infinite" belief that a frozen bit is 0. The min-sum
// propagation function G(x,y) = sign(x)sign(y)min(|x|,|y|) is the paper's; the
// word width, the saturation and the encoding of the constituent-code roles are
// choices of this design.
package xjbp_pkg;

  // Word width of one LLR message (the paper gives no quantisation).
  localparam int unsigned LLR_W   = 7;
  localparam int          LLR_MAX = (1 << (LLR_W - 1)) - 1;

  typedef logic signed [LLR_W-1:0] llr_t;

  // Role of a node in a column of the factor graph. A node whose block at that
  // column is a maximal constituent code carries the code's type; every other
  // node is CC_NONE and is updated by the ordinary processing elements.
  typedef enum logic [2:0] {
    CC_NONE = 3'd0,
    CC_N0   = 3'd1,  // all leaves frozen: R = +inf, never recomputed
    CC_N1   = 3'd2,  // all leaves information: R = 0, never recomputed
    CC_REP  = 3'd3,  // repetition code: R_i = sum of the other L_k
    CC_SPC  = 3'd4   // single parity check: min-sum check over the other L_k
  } cc_type_e;

  // Direction of one processing-element step.
  typedef enum logic {
    DIR_L = 1'b0,    // right-to-left: computes L of column j
    DIR_R = 1'b1     // left-to-right: computes R of column j+1
  } pe_dir_e;

  // Clamp a wide signed value into the message range.
  function automatic llr_t sat_llr(input logic signed [LLR_W+1:0] v);
    localparam logic signed [LLR_W+1:0] HI = (LLR_W+2)'(LLR_MAX);
    localparam logic signed [LLR_W+1:0] LO = -HI;
    if (v > HI)      return llr_t'(LLR_MAX);
    else if (v < LO) return llr_t'(-LLR_MAX);
    else             return llr_t'(v);
  endfunction

  // Saturating sum of two messages.
  function automatic llr_t add_llr(input llr_t a, input llr_t b);
    logic signed [LLR_W+1:0] s;
    s = (LLR_W+2)'(a) + (LLR_W+2)'(b);
    return sat_llr(s);
  endfunction

  // Magnitude of a message (never overflows: the range is symmetric).
  function automatic logic [LLR_W-2:0] mag_llr(input llr_t a);
    llr_t n;
    n = -a;
    return a[LLR_W-1] ? n[LLR_W-2:0] : a[LLR_W-2:0];
  endfunction

  // Min-sum propagation function G(x,y) ~ sign(x)sign(y)min(|x|,|y|).
  // A zero input gives a zero result, as the exact function does.
  function automatic llr_t g_ms(input llr_t x, input llr_t y);
    logic [LLR_W-2:0] mx, my, mn;
    logic             neg;
    mx  = mag_llr(x);
    my  = mag_llr(y);
    mn  = (mx < my) ? mx : my;
    neg = x[LLR_W-1] ^ y[LLR_W-1];
    return neg ? -llr_t'({1'b0, mn}) : llr_t'({1'b0, mn});
  endfunction

endpackage
