// bnu -- basic node unit: list decoding of R0, REP and G-PC nodes.
//
// Decodes a node of stage s = r directly (R0, REP, R1, SPC, TYPE-III) or the
// SR-II (rate-one) part of an SR node whose SR-I part the RSU has resolved.
// It keeps the list state of every path ("BNU memory"): source LLRs, current
// partial sums, G-PC group data (parity gamma, index eps and magnitude of the
// smallest |LLR| per group), the sorting metric zeta, the set of positions
// already forked on, path metric, validity, parent path and sequence index.
//
// Cycles from 'start' (or from the RSU's first cycle for SR nodes), matching
// the paper's NPU latency table (F = min(T_type, K) path forks, T = empirical
// fork limit):
//   R0        1      adder tree: PM += sum of |LLR| with negative sign
//   REP       2      adder tree -> registers; PM fork (L to 2L), sorter 2L to L
//   R1        1+F    CAS tree -> registers (first fork position); F forks
//   SPC/T3    1+1+F  Wagner decoding (parity fix, PM += gamma|min|); CAS; F forks
//   SR(R1)    2+F    RSU (2); F forks, the first position comes from the RSU
//   SR(SPC/T3)2+1+F  RSU (2); CAS; F forks
// followed by one 'done' cycle in which the outputs are valid and the rest of
// the decoder updates its memories.
//
// Path fork j: for every path, the CAS tree has picked (one cycle ahead, from
// the registers) the unvisited position i with the smallest
// zeta[i] = |lambda[i]| + (1 - 2 gamma_q)|lambda[eps_q]| (|lambda[i]| for R1),
// eps positions excluded.  Candidate A keeps the path, candidate B flips bit i
// (and, for SPC/TYPE-III, bit eps_q so that the group parity holds) at cost
// Delta = |lambda[i]| + (1 - 2 gamma_q)|lambda[eps_q]|, after which gamma_q
// toggles.  The 2L candidates go through a 2L-to-L partial rank-order sorter.
// At the end the smallest PM is subtracted from all PMs (PM subtraction).
// Following the paper, zeta is fixed by the parities before the first fork
// (the order is sorted once); the per-cycle CAS minimum search replaces a full
// sorter.  Outputs: surviving path p descends from input path out_org[p]; for
// SR nodes out_beta is the source result expanded with repetition sequence
// S^k: beta_s[2^r m + j] = beta_r[j] xor S^k[m].
module bnu
  import srl_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T_R1  = T_R1_DEF,
  parameter int unsigned T_SPC = T_SPC_DEF,
  parameter int unsigned T_T3  = T_T3_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // direct node (s = r)
  input  logic                 start,
  input  node_e                ntype,
  input  logic [3:0]           s,
  input  llr_t                 llr_in [L][NS_MAX],
  input  pm_t                  pm_in  [L],
  input  logic                 val_in [L],
  // SR node: load from the RSU at the end of its second cycle
  input  logic                 load_sr,
  input  logic [1:0]           sr_sd,
  input  logic [1:0]           sr_np,
  input  logic [$clog2(L)-1:0] sv_par [L],
  input  logic [LOG_S_MAX-1:0] sv_k   [L],
  input  pm_t                  sv_pm  [L],
  input  logic                 sv_val [L],
  input  sllr_t                sv_llr [L][NS_MAX/2],
  input  logic                 sv_gam [L][2],
  input  logic [3:0]           sv_eps [L][2],
  input  logic [SLLR_W-1:0]    sv_mag [L][2],
  // results
  output logic                 busy,
  output logic                 done,
  output logic [$clog2(L)-1:0] out_org  [L],
  output logic [NS_MAX-1:0]    out_beta [L],
  output pm_t                  out_pm   [L],
  output logic                 out_val  [L]
);
  localparam int LW = $clog2(L);
  localparam int ZW = SLLR_W + 1;
  localparam int KW = PM_W + 1;
  localparam int JW = LOG_NS_MAX;

  typedef enum logic [2:0] {S_IDLE, S_REP, S_CAS, S_FORK, S_DONE} state_e;
  state_e state;

  // node parameters
  logic [1:0] c_np, c_sd;
  logic [3:0] c_r;
  logic [3:0] c_s;
  logic [3:0] forks;

  // list state (BNU memory)
  sllr_t             st_lam  [L][NS_MAX];
  logic [NS_MAX-1:0] st_beta [L];
  logic [ZW-1:0]     st_zeta [L][NS_MAX];
  logic [NS_MAX-1:0] st_vis  [L];
  logic [JW-1:0]     st_j    [L];
  logic              st_jok  [L];
  logic              st_gam  [L][2];
  logic [JW-1:0]     st_eps  [L][2];
  logic [SLLR_W-1:0] st_mag  [L][2];
  pm_t               st_pm   [L];
  logic              st_val  [L];
  logic [LW-1:0]     st_org  [L];
  logic [LOG_S_MAX-1:0] st_k [L];
  logic [PM_W+4:0]   st_p0 [L], st_p1 [L];

  function automatic int unsigned fork_limit(input node_e t, input logic [1:0] npv, input int nr);
    int unsigned lim, kk;
    if (t == NT_R1 || (t == NT_SR && npv == 2'd0)) begin lim = T_R1;  kk = nr;     end
    else if (t == NT_SPC || (t == NT_SR && npv == 2'd1)) begin lim = T_SPC; kk = nr - 1; end
    else begin lim = T_T3; kk = nr - 2; end
    return (lim < kk) ? lim : kk;
  endfunction

  // ------------------------------------------------------------ direct-load datapath
  // adder tree (R0/REP penalties), Wagner decoding and CAS tree on the input
  logic [PM_W+4:0]   a_p0 [L], a_p1 [L];
  sllr_t             d_lam  [L][NS_MAX];
  logic [NS_MAX-1:0] d_beta [L];
  logic              d_gam  [L][2];
  logic [JW-1:0]     d_eps  [L][2];
  logic [SLLR_W-1:0] d_mag  [L][2];

  always_comb begin
    int ns;
    ns = 1 << s;
    for (int l = 0; l < int'(L); l++) begin
      a_p0[l] = '0;
      a_p1[l] = '0;
      d_beta[l] = '0;
      for (int i = 0; i < int'(NS_MAX); i++) begin
        d_lam[l][i] = (i < ns) ? sllr_t'(llr_in[l][i]) : '0;
        if (i < ns) begin
          if (llr_in[l][i][LLR_W-1]) a_p0[l] = a_p0[l] + (PM_W+5)'(llr_abs(llr_in[l][i]));
          else                       a_p1[l] = a_p1[l] + (PM_W+5)'(llr_abs(llr_in[l][i]));
          d_beta[l][i] = llr_in[l][i][LLR_W-1];
        end
      end
      // group statistics: group = index parity for TYPE-III, one group otherwise
      for (int g = 0; g < 2; g++) begin
        d_gam[l][g] = 1'b0;
        d_eps[l][g] = '0;
        d_mag[l][g] = '1;
      end
      for (int i = 0; i < int'(NS_MAX); i++) begin
        int unsigned g;
        g = (ntype == NT_T3) ? (32'(i) & 32'd1) : 32'd0;
        if (i < ns) begin
          d_gam[l][g] ^= d_beta[l][i];
          if (sllr_abs(d_lam[l][i]) < d_mag[l][g]) begin
            d_mag[l][g] = sllr_abs(d_lam[l][i]);
            d_eps[l][g] = JW'(i);
          end
        end
      end
    end
  end

  // ------------------------------------------------------------ CAS tree
  // smallest zeta among allowed positions; 'cur' = position being forked now
  function automatic logic [ZW-1:0] zeta_of(input sllr_t lam, input logic gam,
                                            input logic [SLLR_W-1:0] mag, input logic [1:0] npv);
    logic [ZW-1:0] a;
    a = ZW'(sllr_abs(lam));
    if (npv == 2'd0) return a;
    else if (gam)    return a - ZW'(mag);
    else             return a + ZW'(mag);
  endfunction

  logic [ZW-1:0] z_cur [L][NS_MAX];   // zeta used by the CAS tree this cycle
  logic [JW-1:0] cas_j [L];
  logic          cas_ok [L];

  always_comb begin
    int nr;
    nr = 1 << c_r;
    for (int l = 0; l < int'(L); l++) begin
      logic [NS_MAX-1:0] allowed;
      logic [ZW-1:0]     best;
      for (int i = 0; i < int'(NS_MAX); i++) begin
        int unsigned g;
        g = (c_np == 2'd2) ? (32'(i) & 32'd1) : 32'd0;
        z_cur[l][i] = (state == S_CAS) ? zeta_of(st_lam[l][i], st_gam[l][g], st_mag[l][g], c_np)
                                       : st_zeta[l][i];
      end
      allowed = ~st_vis[l];
      if (state == S_FORK && st_jok[l]) allowed[st_j[l]] = 1'b0;
      if (c_np != 2'd0) allowed[st_eps[l][0]] = 1'b0;
      if (c_np == 2'd2) allowed[st_eps[l][1]] = 1'b0;
      for (int i = 0; i < int'(NS_MAX); i++) if (i >= nr) allowed[i] = 1'b0;
      best      = '1;
      cas_j[l]  = '0;
      cas_ok[l] = 1'b0;
      for (int i = 0; i < int'(NS_MAX); i++)
        if (allowed[i] && (!cas_ok[l] || z_cur[l][i] < best)) begin
          best      = z_cur[l][i];
          cas_j[l]  = JW'(i);
          cas_ok[l] = 1'b1;
        end
    end
  end

  // ------------------------------------------------------------ PM fork and sorter
  logic [KW-1:0] ckey [2*L];
  logic [KW-1:0] skey [L];
  logic [LW:0]   sidx [L];

  always_comb begin
    for (int l = 0; l < int'(L); l++) begin
      logic [PM_W+4:0] dl, pb;
      int unsigned q;
      q  = (c_np == 2'd2) ? 32'(st_j[l][0]) : 32'd0;
      dl = (PM_W+5)'(sllr_abs(st_lam[l][st_j[l]]));
      if (c_np != 2'd0)
        dl = st_gam[l][q] ? dl - (PM_W+5)'(st_mag[l][q]) : dl + (PM_W+5)'(st_mag[l][q]);
      if (state == S_REP) begin
        ckey[l]          = {~st_val[l], pm_sat((PM_W+5)'(st_pm[l]) + st_p0[l])};
        ckey[l + int'(L)] = {~st_val[l], pm_sat((PM_W+5)'(st_pm[l]) + st_p1[l])};
        pb = '0;
      end else begin
        pb = (PM_W+5)'(st_pm[l]) + dl;
        ckey[l]          = {~st_val[l], st_pm[l]};
        ckey[l + int'(L)] = {~(st_val[l] && st_jok[l]), pm_sat(pb)};
      end
    end
  end

  partial_rank_sorter #(.X(2*L), .Y(L), .KW(KW)) u_sorter
    (.key_in(ckey), .key_out(skey), .idx_out(sidx));

  // SR geometry of the node being loaded from the RSU
  logic [3:0] c_s_sr, c_r_sr;
  assign c_s_sr = s;
  assign c_r_sr = s - {2'b00, sr_sd};

  // ------------------------------------------------------------ state update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      forks <= '0;
      c_np  <= '0;
      c_sd  <= '0;
      c_r   <= '0;
      c_s   <= '0;
      for (int l = 0; l < int'(L); l++) begin
        st_val[l] <= 1'b0;
        st_pm[l]  <= '0;
        st_org[l] <= LW'(l);
        st_k[l]   <= '0;
        st_beta[l] <= '0;
        st_vis[l] <= '0;
        st_jok[l] <= 1'b0;
        st_j[l]   <= '0;
      end
    end else begin
      case (state)
        S_IDLE: begin
          if (start) begin
            c_s  <= s;
            c_r  <= s;
            c_sd <= '0;
            c_np <= (ntype == NT_SPC) ? 2'd1 : (ntype == NT_T3) ? 2'd2 : 2'd0;
            forks <= 4'(fork_limit(ntype, (ntype == NT_SPC) ? 2'd1 : 2'd2, 1 << s));
            for (int l = 0; l < int'(L); l++) begin
              st_org[l] <= LW'(l);
              st_k[l]   <= '0;
              st_val[l] <= val_in[l];
              st_vis[l] <= '0;
              st_lam[l] <= d_lam[l];
              st_p0[l]  <= a_p0[l];
              st_p1[l]  <= a_p1[l];
              st_gam[l] <= d_gam[l];
              st_eps[l] <= d_eps[l];
              st_mag[l] <= d_mag[l];
              for (int i = 0; i < int'(NS_MAX); i++) st_zeta[l][i] <= ZW'(sllr_abs(d_lam[l][i]));
            end
            case (ntype)
              NT_R0: begin
                for (int l = 0; l < int'(L); l++) begin
                  st_pm[l]   <= pm_sat((PM_W+5)'(pm_in[l]) + a_p0[l]);
                  st_beta[l] <= '0;
                end
                state <= S_DONE;
              end
              NT_REP: begin
                for (int l = 0; l < int'(L); l++) st_pm[l] <= pm_in[l];
                state <= S_REP;
              end
              NT_R1: begin
                // CAS tree on the input: smallest |LLR| of the node
                for (int l = 0; l < int'(L); l++) begin
                  st_pm[l]   <= pm_in[l];
                  st_beta[l] <= d_beta[l];
                  st_j[l]    <= d_eps[l][0];
                  st_jok[l]  <= 1'b1;
                end
                state <= (fork_limit(ntype, 2'd0, 1 << s) == 0) ? S_DONE : S_FORK;
              end
              default: begin
                // Wagner decoding: satisfy the group parities at least cost
                for (int l = 0; l < int'(L); l++) begin
                  logic [NS_MAX-1:0] b;
                  logic [PM_W+4:0]   p;
                  b = d_beta[l];
                  p = (PM_W+5)'(pm_in[l]);
                  if (d_gam[l][0]) begin b[d_eps[l][0]] = ~b[d_eps[l][0]]; p = p + (PM_W+5)'(d_mag[l][0]); end
                  if (ntype == NT_T3 && d_gam[l][1]) begin
                    b[d_eps[l][1]] = ~b[d_eps[l][1]];
                    p = p + (PM_W+5)'(d_mag[l][1]);
                  end
                  st_beta[l] <= b;
                  st_pm[l]   <= pm_sat(p);
                  st_jok[l]  <= 1'b0;
                end
                state <= S_CAS;
              end
            endcase
          end else if (load_sr) begin
            c_sd <= sr_sd;
            c_np <= sr_np;
            forks <= 4'(fork_limit(NT_SR, sr_np, 1 << int'(c_r_sr)));
            c_r  <= c_r_sr;
            c_s  <= c_s_sr;
            for (int l = 0; l < int'(L); l++) begin
              logic [NS_MAX-1:0] b;
              st_org[l] <= sv_par[l];
              st_k[l]   <= sv_k[l];
              st_val[l] <= sv_val[l];
              st_pm[l]  <= sv_pm[l];
              st_vis[l] <= '0;
              b = '0;
              for (int i = 0; i < int'(NS_MAX); i++) begin
                st_lam[l][i]  <= (i < int'(NS_MAX / 2)) ? sv_llr[l][i % int'(NS_MAX / 2)] : '0;
                st_zeta[l][i] <= (i < int'(NS_MAX / 2)) ? ZW'(sllr_abs(sv_llr[l][i % int'(NS_MAX / 2)])) : '0;
                if (i < int'(NS_MAX / 2)) b[i] = sv_llr[l][i % int'(NS_MAX / 2)][SLLR_W-1];
              end
              // ML candidate: parity already paid for in the RSU's PM
              if (sr_np != 2'd0 && sv_gam[l][0]) b[LOG_NS_MAX'(sv_eps[l][0])] = ~b[LOG_NS_MAX'(sv_eps[l][0])];
              if (sr_np == 2'd2 && sv_gam[l][1]) b[LOG_NS_MAX'(sv_eps[l][1])] = ~b[LOG_NS_MAX'(sv_eps[l][1])];
              st_beta[l] <= b;
              for (int g = 0; g < 2; g++) begin
                st_gam[l][g] <= sv_gam[l][g];
                st_eps[l][g] <= JW'(sv_eps[l][g]);
                st_mag[l][g] <= sv_mag[l][g];
              end
              st_j[l]   <= JW'(sv_eps[l][0]);
              st_jok[l] <= (sr_np == 2'd0);
            end
            state <= (sr_np == 2'd0) ? ((fork_limit(NT_SR, sr_np, 1 << int'(c_r_sr)) == 0) ? S_DONE : S_FORK)
                                     : S_CAS;
          end
        end

        S_REP: begin
          for (int p = 0; p < int'(L); p++) begin
            int src;
            logic eta;
            src = int'(sidx[p]) % int'(L);
            eta = sidx[p][LW];
            st_org[p]  <= st_org[src];
            st_val[p]  <= ~skey[p][KW-1];
            st_pm[p]   <= skey[p][PM_W-1:0];
            st_beta[p] <= eta ? NS_MAX'((64'd1 << (1 << c_s)) - 64'd1) : '0;
          end
          state <= S_DONE;
        end

        S_CAS: begin
          for (int l = 0; l < int'(L); l++) begin
            st_zeta[l] <= z_cur[l];
            st_j[l]    <= cas_j[l];
            st_jok[l]  <= cas_ok[l];
          end
          state <= (forks == 0) ? S_DONE : S_FORK;
        end

        S_FORK: begin
          for (int p = 0; p < int'(L); p++) begin
            int src;
            logic flip;
            int unsigned q;
            logic [NS_MAX-1:0] b;
            src  = int'(sidx[p]) % int'(L);
            flip = sidx[p][LW];
            q    = (c_np == 2'd2) ? 32'(st_j[src][0]) : 32'd0;
            b    = st_beta[src];
            st_org[p]  <= st_org[src];
            st_k[p]    <= st_k[src];
            st_val[p]  <= ~skey[p][KW-1];
            st_pm[p]   <= skey[p][PM_W-1:0];
            st_lam[p]  <= st_lam[src];
            st_zeta[p] <= st_zeta[src];
            st_eps[p]  <= st_eps[src];
            st_mag[p]  <= st_mag[src];
            st_vis[p]  <= st_vis[src] | (NS_MAX'(1) << st_j[src]);
            st_j[p]    <= cas_j[src];
            st_jok[p]  <= cas_ok[src];
            st_gam[p]  <= st_gam[src];
            if (flip) begin
              b[st_j[src]] = ~b[st_j[src]];
              if (c_np != 2'd0) begin
                b[st_eps[src][q]] = ~b[st_eps[src][q]];
                st_gam[p][q] <= ~st_gam[src][q];
              end
            end
            st_beta[p] <= b;
          end
          forks <= forks - 4'd1;
          if (forks == 4'd1) state <= S_DONE;
        end

        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ outputs
  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  always_comb begin
    pm_t minpm;
    minpm = '1;
    for (int l = 0; l < int'(L); l++)
      if (st_val[l] && st_pm[l] < minpm) minpm = st_pm[l];
    for (int l = 0; l < int'(L); l++) begin
      logic [(1<<LOG_S_MAX)-1:0] sq;
      int nr;
      nr = 1 << c_r;
      sq = rep_seq(int'(c_sd), int'(st_k[l]));
      out_org[l] = st_org[l];
      out_val[l] = st_val[l];
      out_pm[l]  = st_val[l] ? st_pm[l] - minpm : st_pm[l];
      out_beta[l] = '0;
      for (int i = 0; i < int'(NS_MAX); i++)
        if (i < (1 << c_s))
          out_beta[l][i] = st_beta[l][i % nr] ^ sq[i >> c_r];
    end
  end
endmodule
