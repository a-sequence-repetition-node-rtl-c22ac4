// scu -- SC unit: multi-stage f/g datapath for all L paths.
//
// Each path has NPE processing elements in the first stage and NPE/2 in the
// second (the paper's #SCU = 2 stages, #PE = 64).  In one clock cycle the unit
// evaluates up to two tree stages combinationally:
//   first stage : y1[q] = op1(a[q], b[q], z1[q])           q < NPE
//   second stage: y2[q] = op2(y1[q], y1[q+NPE/2], z2[q])  q < NPE/2
// For a two-stage step from a node of stage s with h = 2^(s-2), lane q of
// chunk c reads a = lambda[o], b = lambda[o+2h] and lane q+NPE/2 reads
// a = lambda[o+h], b = lambda[o+3h] with o = c*NPE/2 + q, so y2[q] is
// lambda_(s-2)[o].  For a one-stage step y1[q] is lambda_(s-1)[c*NPE+q].
// Both results are offered; the memory stores the one selected by the
// instruction (flexible multi-stage decoding: the stop stage is chosen per
// instruction).  Operand routing (address generation and gathering) is done by
// the LLR memories, the partial sums z1/z2 are gathered from the PSUM unit.
// Purely combinational; the LLR memory registers the result.
module scu
  import srl_pkg::*;
#(
  parameter int unsigned L   = L_DEF,
  parameter int unsigned PEN = NPE
) (
  input  llr_t a  [L][PEN],
  input  llr_t b  [L][PEN],
  input  logic z1 [L][PEN],
  input  logic z2 [L][PEN/2],
  input  logic op1,              // 0: f, 1: g in the first stage
  input  logic op2,              // 0: f, 1: g in the second stage
  output llr_t y1 [L][PEN],
  output llr_t y2 [L][PEN/2]
);
  for (genvar l = 0; l < L; l++) begin : g_path
    for (genvar q = 0; q < PEN; q++) begin : g_st1
      fg_pe u_pe (.a(a[l][q]), .b(b[l][q]), .z(z1[l][q]), .sel_g(op1), .y(y1[l][q]));
    end
    for (genvar q = 0; q < PEN/2; q++) begin : g_st2
      fg_pe u_pe (.a(y1[l][q]), .b(y1[l][q+PEN/2]), .z(z2[l][q]), .sel_g(op2), .y(y2[l][q]));
    end
  end
endmodule
