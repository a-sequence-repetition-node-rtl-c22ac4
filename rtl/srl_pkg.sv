// srl_pkg -- constants, types and small arithmetic helpers shared by the
// SR-List polar decoder.
//
// The defaults describe the decoder configuration that is treated as the main
// one: the downlink (PDCCH) variant with a maximum mother code length of 512,
// list size L = 8, at most |S|max = 4 repetition sequences per SR node, G-PC
// source nodes with at most Np = 2 frozen bits, a node size limit of 32, a
// two-stage SC unit with 64 processing elements in its first stage, 6-bit
// LLRs (Q6.2) and 7-bit path metrics (Q7.0), and empirical path-forking
// limits T = [T_R1, T_SPC, T_TYPE3] = [2, 3, 3].
//
// LLRs are held in two's complement and saturated symmetrically to
// +/-(2^(LLR_W-1)-1); this represents exactly the same values as the
// sign-magnitude format of the same width.  Path metrics are unsigned and
// saturate at their maximum.  Path validity is carried as a separate flag so
// that a saturated metric is never confused with an unused list entry.
package srl_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned L_DEF        = 8;   // list size
  localparam int unsigned N_LOG_DEF    = 9;   // log2 of maximum code length (512, DL)
  localparam int unsigned LOG_NS_MAX   = 5;   // largest NPU node: 2^5 = 32
  localparam int unsigned NS_MAX       = 1 << LOG_NS_MAX;
  localparam int unsigned S_MAX        = 4;   // |S|max
  localparam int unsigned LOG_S_MAX    = 2;   // log2(|S|max) = largest s - r
  localparam int unsigned SCU_STAGES   = 2;   // #SCU
  localparam int unsigned NPE          = 64;  // #PE in first SCU stage
  localparam int unsigned LLR_W        = 6;   // Q6.2
  localparam int unsigned SLLR_W       = LLR_W + LOG_S_MAX; // source LLRs inside the NPU
  localparam int unsigned PM_W         = 7;   // Q7.0
  localparam int unsigned T_R1_DEF     = 2;
  localparam int unsigned T_SPC_DEF    = 3;
  localparam int unsigned T_T3_DEF     = 3;

  localparam int signed LLR_MAX  = (1 <<< (LLR_W - 1)) - 1;
  localparam int signed SLLR_MAX = (1 <<< (SLLR_W - 1)) - 1;
  localparam int unsigned PM_MAX = (1 << PM_W) - 1;

  typedef logic signed [LLR_W-1:0]  llr_t;
  typedef logic signed [SLLR_W-1:0] sllr_t;
  typedef logic        [PM_W-1:0]   pm_t;

  // ---------------------------------------------------------------- instructions
  typedef enum logic [1:0] {
    OP_SCU  = 2'd0,   // compute LLRs of a child/grandchild node
    OP_NODE = 2'd1,   // decode a node with the NPU, then update PSUM/Us/pointers
    OP_END  = 2'd2    // last instruction of a codeword: run the CRC and output
  } op_e;

  typedef enum logic [2:0] {
    NT_R0  = 3'd0,
    NT_REP = 3'd1,
    NT_R1  = 3'd2,    // G-PC with Np = 0
    NT_SPC = 3'd3,    // G-PC with Np = 1
    NT_T3  = 3'd4,    // G-PC with Np = 2 (TYPE-III)
    NT_SR  = 3'd5     // SR node with s > r, G-PC source given by np
  } node_e;

  // One instruction.  For OP_SCU, 'stage' is the stage the LLRs are read from,
  // 'nst' the number of SCU stages used (1 or 2) and 'fg' the function per
  // stage (bit 0: first stage, bit 1: second stage; 0 = f, 1 = g).  For OP_NODE,
  // 'stage' is s, 'sd' = s - r, 'v' the R0/REP vector (v[t] for the left node at
  // stage s-t-1), 'np' the number of frozen bits of the G-PC source node and
  // 'base' the index of the first leaf of the node.
  typedef struct packed {
    op_e         op;
    logic [3:0]  stage;
    logic [1:0]  nst;
    logic [1:0]  fg;
    node_e       ntype;
    logic [1:0]  sd;
    logic [1:0]  v;
    logic [1:0]  np;
    logic [10:0] base;
  } instr_t;

  // ---------------------------------------------------------------- helpers
  function automatic llr_t sat_llr(input logic signed [LLR_W+1:0] x);
    if (x > (LLR_W+2)'(LLR_MAX))       return llr_t'(LLR_MAX);
    else if (x < -(LLR_W+2)'(LLR_MAX)) return llr_t'(-LLR_MAX);
    else                   return llr_t'(x);
  endfunction

  function automatic logic [LLR_W-1:0] llr_abs(input llr_t x);
    return x[LLR_W-1] ? LLR_W'(-x) : LLR_W'(x);
  endfunction

  function automatic logic [SLLR_W-1:0] sllr_abs(input sllr_t x);
    return x[SLLR_W-1] ? SLLR_W'(-x) : SLLR_W'(x);
  endfunction

  // f(x,y) = sgn(x) sgn(y) min(|x|,|y|)
  function automatic llr_t f_func(input llr_t x, input llr_t y);
    logic [LLR_W-1:0] ax, ay, m;
    ax = llr_abs(x);
    ay = llr_abs(y);
    m  = (ax < ay) ? ax : ay;
    return (x[LLR_W-1] ^ y[LLR_W-1]) ? llr_t'(-m) : llr_t'(m);
  endfunction

  // g(x,y,z) = (1-2z) x + y, saturated
  function automatic llr_t g_func(input llr_t x, input llr_t y, input logic z);
    logic signed [LLR_W+1:0] sx, sy;
    sx = z ? -(LLR_W+2)'(x) : (LLR_W+2)'(x);
    sy = (LLR_W+2)'(y);
    return sat_llr(sx + sy);
  endfunction

  function automatic pm_t pm_sat(input logic [PM_W+4:0] x);
    return (x > (PM_W+5)'(PM_MAX)) ? pm_t'(PM_MAX) : pm_t'(x);
  endfunction

  // Polar transform x = u F^{(x)s} of the first 2^s bits (involutory, so it
  // also maps a node's PSUM vector back to its message bits).
  function automatic logic [NS_MAX-1:0] polar_transform(input logic [NS_MAX-1:0] v,
                                                        input int unsigned s);
    logic [NS_MAX-1:0] w;
    w = v;
    for (int t = 0; t < LOG_NS_MAX; t++)
      if (t < int'(s))
        for (int j = 0; j < NS_MAX; j++)
          if (((j >> t) & 1) == 0) w[j] = w[j] ^ w[j | (1 << t)];
    return w;
  endfunction

  // Repetition sequence S^k for s - r = sd and eta given by the bits of k:
  // S = (eta[0],0) [+] (eta[1],0) [+] ...; element m of S is the XOR of
  // eta[t] over the t whose bit (sd-1-t) of m is zero.
  function automatic logic [(1<<LOG_S_MAX)-1:0] rep_seq(input int unsigned sd,
                                                        input int unsigned k);
    logic [(1<<LOG_S_MAX)-1:0] sq;
    sq = '0;
    for (int m = 0; m < (1 << LOG_S_MAX); m++)
      for (int t = 0; t < LOG_S_MAX; t++)
        if (t < int'(sd) && ((k >> t) & 1) == 1 && ((m >> (int'(sd) - 1 - t)) & 1) == 0)
          sq[m] = ~sq[m];
    return sq;
  endfunction

  // ---------------------------------------------------------------- LLR storage map
  // Internal LLR memory keeps all stages a node can be decoded at
  // (t <= LOG_NS_MAX) and, above those, only every SCU_STAGES-th stage counted
  // down from the root; the stages in between are recomputed inside the SCU.
  function automatic bit stage_stored(input int t, input int nlog);
    return (t <= int'(LOG_NS_MAX)) || (t < nlog && ((nlog - t) % int'(SCU_STAGES)) == 0);
  endfunction

  function automatic int stage_off(input int t, input int nlog);
    int o;
    o = 0;
    for (int u = 0; u < 16; u++)
      if (u < t && stage_stored(u, nlog)) o += (1 << u);
    return o;
  endfunction

  // ---------------------------------------------------------------- SCU routing
  // Read address (into the parent vector of stage s) of operand a (opb = 0)
  // or b (opb = 1) of first-stage lane q in chunk c.
  function automatic int scu_rd_addr(input int s, input int nst, input int c,
                                     input int q, input bit opb);
    int h, o;
    if (nst == 1) begin
      h = 1 << (s - 1);
      o = c * int'(NPE) + q;
      return o + (opb ? h : 0);
    end else begin
      h = 1 << (s - 2);
      if (q < int'(NPE / 2)) begin
        o = c * int'(NPE / 2) + q;
        return o + (opb ? 2 * h : 0);
      end else begin
        o = c * int'(NPE / 2) + q - int'(NPE / 2);
        return o + h + (opb ? 2 * h : 0);
      end
    end
  endfunction

  // Index of the result of lane q (first stage when nst = 1, second otherwise).
  function automatic int scu_wr_addr(input int nst, input int c, input int q);
    return (nst == 1) ? c * int'(NPE) + q : c * int'(NPE / 2) + q;
  endfunction

  // Number of SCU cycles for one step.
  function automatic int scu_chunks(input int s, input int nst);
    int outs, w;
    outs = 1 << (s - nst);
    w    = (nst == 1) ? int'(NPE) : int'(NPE / 2);
    return (outs <= w) ? 1 : outs / w;
  endfunction

endpackage
