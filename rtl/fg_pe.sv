// fg_pe -- one SC processing element.
//
// Computes either the f-function, sgn(a) sgn(b) min(|a|,|b|), or the
// g-function, (1-2z) a + b, of two LLRs, selected by 'sel_g'.  The result of g
// saturates to the LLR range.  Purely combinational; several PEs are chained in
// the SC unit so that two tree stages are evaluated in one clock cycle.  The
// min-sum f and the g of the SC decoder are as in the paper; saturation is this
// design's choice.
module fg_pe
  import srl_pkg::*;
(
  input  llr_t a,      // LLR from the first half of the parent vector
  input  llr_t b,      // LLR from the second half of the parent vector
  input  logic z,      // partial sum of the left sibling (g only)
  input  logic sel_g,  // 0: f, 1: g
  output llr_t y
);
  always_comb y = sel_g ? g_func(a, b, z) : f_func(a, b);
endmodule
