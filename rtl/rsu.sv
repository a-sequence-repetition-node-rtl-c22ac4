// rsu -- repetition sequence unit (SR-I part of SR-List decoding).
//
// Decodes the R0/REP part of an SR node of stage s whose source node (a G-PC
// node with np = 0, 1 or 2 frozen bits) sits at stage r = s - sd, sd in {1,2}.
// It evaluates every repetition sequence S^k (k < |S|max, a sequence being
// valid when k has no bit where v is 0) for every parent path l, selects the L
// best of the |S|max*L candidate paths and hands them to the basic node unit.
//
// Cycle 1, sequence extension unit (SEU), registered at the clock edge into
// the RSU memory:
//   source LLRs   lambda_r^{l,k}[j] = sum_m (1-2 S^k[m]) lambda_s^l[2^r m + j]
//                 (a two-level adder tree; a multiplexer takes the first level
//                 when sd = 1 and the second when sd = 2),
//   penalty unit  sum_j |lambda_s[j]| over the bits where HD(lambda_s) differs
//                 from the re-expanded hard decisions of lambda_r^{l,k},
//   comp unit     index/magnitude of the smallest |lambda_r| among even
//                 indices, odd indices and overall,
//   parity unit   parities of the hard decisions (even, odd, all).
// Cycle 2, sequence sorter unit (SSU), combinational into the BNU's registers:
//   PM calc       PM_s^l + penalty + Delta^{l,k}, Delta from the G-PC parities
//                 and minima (0, gamma|min|, or gamma_e|min_e| + gamma_o|min_o|),
//   sorter        partial rank-order sorter |S|max*L -> L on {invalid, PM}.
// Outputs per surviving candidate: parent path, sequence k, PM, source LLRs,
// and the G-PC group data (group 0 = whole node for np <= 1, even indices for
// np = 2; group 1 = odd indices).  For np = 0 eps0 is the overall minimum,
// which is the first position to fork on.
// The structure follows the paper's RSU figure; the direct index selection
// stands in for its bit-reversal routing network (same function), and the
// adder tree limits SR nodes to s - r <= log2(|S|max).
module rsu
  import srl_pkg::*;
#(
  parameter int unsigned L = L_DEF
) (
  input  logic                 clk,
  input  logic                 start,          // cycle 1 of an SR node
  input  logic [3:0]           s,
  input  logic [1:0]           sd,
  input  logic [1:0]           v,
  input  logic [1:0]           np,
  input  llr_t                 llr_in  [L][NS_MAX],
  input  pm_t                  pm_in   [L],
  input  logic                 val_in  [L],
  // cycle 2 results (valid the cycle after 'start')
  output logic [$clog2(L)-1:0] sv_par  [L],
  output logic [LOG_S_MAX-1:0] sv_k    [L],
  output pm_t                  sv_pm   [L],
  output logic                 sv_val  [L],
  output sllr_t                sv_llr  [L][NS_MAX/2],
  output logic                 sv_gam  [L][2],
  output logic [3:0]           sv_eps  [L][2],
  output logic [SLLR_W-1:0]    sv_mag  [L][2]
);
  localparam int K  = 1 << LOG_S_MAX;       // sequences evaluated per path
  localparam int NR = NS_MAX / 2;           // largest source node
  localparam int C  = K * L;                // candidates
  localparam int KW = PM_W + 1;

  // ---------------- SEU (combinational part of cycle 1)
  sllr_t             src  [L][K][NR];
  logic [PM_W+4:0]   pen  [L][K];
  logic              gam  [L][K][3];         // even, odd, all
  logic [3:0]        eps  [L][K][3];
  logic [SLLR_W-1:0] mag  [L][K][3];

  for (genvar gl = 0; gl < int'(L); gl++) begin : g_path
    for (genvar gk = 0; gk < K; gk++) begin : g_seq
      always_comb begin
        int r, nr;
        logic [K-1:0]      sq;
        sllr_t             sl [NR];
        logic [PM_W+4:0]   pn;
        logic              gm [3];
        logic [3:0]        ep [3];
        logic [SLLR_W-1:0] mg [3];
        r  = int'(s) - int'(sd);
        nr = 1 << r;
        sq = rep_seq(int'(sd), gk);
        // source LLRs unit
        for (int j = 0; j < NR; j++) begin
          sllr_t t [K];
          sllr_t lvl1a, lvl1b, lvl2;
          for (int m = 0; m < K; m++) begin
            int idx;
            idx  = (m << r) + j;
            t[m] = (j < nr && idx < int'(NS_MAX)) ? sllr_t'(llr_in[gl][idx]) : '0;
            if (sq[m]) t[m] = -t[m];
          end
          lvl1a = t[0] + t[1];
          lvl1b = t[2] + t[3];
          lvl2  = lvl1a + lvl1b;
          sl[j] = (j >= nr) ? '0 : (sd == 2'd1) ? lvl1a : lvl2;
        end
        // penalty unit
        pn = '0;
        for (int i = 0; i < int'(NS_MAX); i++) begin
          logic hd_s, hd_k;
          hd_s = llr_in[gl][i][LLR_W-1];
          hd_k = sl[i % nr][SLLR_W-1] ^ sq[i >> r];
          if (i < (1 << s) && hd_s != hd_k) pn = pn + (PM_W+5)'(llr_abs(llr_in[gl][i]));
        end
        // comp unit and parity unit
        for (int g = 0; g < 3; g++) begin
          gm[g] = 1'b0;
          ep[g] = '0;
          mg[g] = '1;
        end
        for (int j = 0; j < NR; j++) begin
          if (j < nr) begin
            gm[j & 1] ^= sl[j][SLLR_W-1];
            gm[2]     ^= sl[j][SLLR_W-1];
            if (sllr_abs(sl[j]) < mg[j & 1]) begin
              mg[j & 1] = sllr_abs(sl[j]);
              ep[j & 1] = 4'(j);
            end
          end
        end
        if (mg[1] < mg[0]) begin
          mg[2] = mg[1];
          ep[2] = ep[1];
        end else begin
          mg[2] = mg[0];
          ep[2] = ep[0];
        end
        src[gl][gk] = sl;
        pen[gl][gk] = pn;
        gam[gl][gk] = gm;
        eps[gl][gk] = ep;
        mag[gl][gk] = mg;
      end
    end
  end

  // ---------------- RSU memory (end of cycle 1)
  sllr_t             m_src [L][K][NR];
  logic [PM_W+4:0]   m_pen [L][K];
  logic              m_gam [L][K][3];
  logic [3:0]        m_eps [L][K][3];
  logic [SLLR_W-1:0] m_mag [L][K][3];
  pm_t               m_pm  [L];
  logic              m_val [L];
  logic [1:0]        m_sd, m_v, m_np;

  always_ff @(posedge clk) begin
    if (start) begin
      m_src <= src;  m_pen <= pen;  m_gam <= gam;  m_eps <= eps;  m_mag <= mag;
      m_pm  <= pm_in; m_val <= val_in;
      m_sd  <= sd;  m_v <= v;  m_np <= np;
    end
  end

  // ---------------- SSU (cycle 2)
  logic [KW-1:0]        key  [C];
  logic [KW-1:0]        skey [L];
  logic [$clog2(C)-1:0] sidx [L];

  always_comb begin
    for (int k = 0; k < K; k++)
      for (int l = 0; l < int'(L); l++) begin
        logic [PM_W+4:0] d, tot;
        logic            ok;
        // group data: (group 0, group 1) = (all, -) for np <= 1, (even, odd) for np = 2
        if (m_np == 2'd2)
          d = (m_gam[l][k][0] ? (PM_W+5)'(m_mag[l][k][0]) : '0) +
              (m_gam[l][k][1] ? (PM_W+5)'(m_mag[l][k][1]) : '0);
        else if (m_np == 2'd1)
          d = m_gam[l][k][2] ? (PM_W+5)'(m_mag[l][k][2]) : '0;
        else
          d = '0;
        tot = (PM_W+5)'(m_pm[l]) + m_pen[l][k] + d;
        ok  = m_val[l] && (k < (1 << m_sd)) && ((2'(k) & ~m_v) == 2'b00);
        key[k * int'(L) + l] = {~ok, pm_sat(tot)};
      end
  end

  partial_rank_sorter #(.X(C), .Y(L), .KW(KW)) u_sorter
    (.key_in(key), .key_out(skey), .idx_out(sidx));

  always_comb begin
    for (int p = 0; p < int'(L); p++) begin
      logic [$clog2(L)-1:0] l;
      logic [LOG_S_MAX-1:0] k;
      // candidate index = k * L + l (L is a power of two)
      {k, l} = sidx[p];
      sv_par[p] = l;
      sv_k[p]   = k;
      sv_pm[p]  = skey[p][PM_W-1:0];
      sv_val[p] = ~skey[p][KW-1];
      sv_llr[p] = m_src[l][k];
      if (m_np == 2'd2) begin
        for (int g = 0; g < 2; g++) begin
          sv_gam[p][g] = m_gam[l][k][g];
          sv_eps[p][g] = m_eps[l][k][g];
          sv_mag[p][g] = m_mag[l][k][g];
        end
      end else begin
        sv_gam[p][0] = (m_np == 2'd1) ? m_gam[l][k][2] : 1'b0;
        sv_eps[p][0] = m_eps[l][k][2];
        sv_mag[p][0] = m_mag[l][k][2];
        sv_gam[p][1] = 1'b0;
        sv_eps[p][1] = m_eps[l][k][2];
        sv_mag[p][1] = m_mag[l][k][2];
      end
    end
  end
endmodule
