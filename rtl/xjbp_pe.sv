// xjbp_pe: one-direction min-sum processing element of the XJ-BP decoder.
//
// A polarization unit of stage j joins nodes (i,j), (i+h,j) on its left to
// (i,j+1), (i+h,j+1) on its right, h = 2^(j-1). The conventional element
// updates both directions at once; with round-trip scheduling only one
// direction is computed per pass, so, as the paper suggests, this element
// evaluates only the two forms G(x, y+z) and G(x, y)+z and a direction input
// chooses the operands:
//
//   dir = DIR_L:  o_top = L(i,j)     = G(L(i,j+1), L(i+h,j+1) + R(i+h,j))
//                 o_bot = L(i+h,j)   = G(R(i,j),  L(i,j+1)) + L(i+h,j+1)
//   dir = DIR_R:  o_top = R(i,j+1)   = G(R(i,j),  L(i+h,j+1) + R(i+h,j))
//                 o_bot = R(i+h,j+1) = G(R(i,j),  L(i,j+1)) + R(i+h,j)
//
// The equations are the paper's Eq. (1)-(2) with min-sum G. The sum
// L(i+h,j+1)+R(i+h,j) and the term G(R(i,j),L(i,j+1)) are shared by both
// directions. Purely combinational; all sums saturate (a choice of this design).
module xjbp_pe
  import xjbp_pkg::*;
(
  input  pe_dir_e dir,
  input  llr_t    l_top_r,   // L(i,j+1)
  input  llr_t    l_bot_r,   // L(i+h,j+1)
  input  llr_t    r_top_l,   // R(i,j)
  input  llr_t    r_bot_l,   // R(i+h,j)
  output llr_t    o_top,
  output llr_t    o_bot
);

  llr_t s_bot;   // L(i+h,j+1) + R(i+h,j)
  llr_t g_rl;    // G(R(i,j), L(i,j+1))

  always_comb begin
    s_bot = add_llr(l_bot_r, r_bot_l);
    g_rl  = g_ms(r_top_l, l_top_r);
    if (dir == DIR_L) begin
      o_top = g_ms(l_top_r, s_bot);
      o_bot = add_llr(g_rl, l_bot_r);
    end else begin
      o_top = g_ms(r_top_l, s_bot);
      o_bot = add_llr(g_rl, r_bot_l);
    end
  end

endmodule
