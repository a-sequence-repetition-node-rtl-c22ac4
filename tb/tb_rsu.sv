// tb_rsu -- random test of the repetition sequence unit (SR-I part), L = 8.
// For random SR nodes (sd = 1 or 2, R0/REP vector v, source G-PC with np = 0,
// 1 or 2) and random input paths, the testbench works out every candidate
// (path l, sequence k) itself: the repetition sequence from the left nodes'
// values, the source LLRs lambda_r[j] = sum_m (1 - 2 S[m]) lambda_s[m nr + j],
// the metric PM + sum of |lambda_s| where the re-expanded hard decision
// disagrees + the G-PC correction (the smallest |lambda_r| of each parity
// group whose hard-decision parity is odd).  One cycle after 'start' the
// unit must offer the L candidates of smallest metric (compared as sorted
// lists), each with the right source LLRs and metric.
module tb_rsu;
  import srl_pkg::*;
  localparam int L = 8, LW = 3;
  logic clk = 0, start = 0;
  logic [3:0] s;
  logic [1:0] sd, v, np;
  llr_t llr_in [L][NS_MAX];
  pm_t  pm_in [L], sv_pm [L];
  logic val_in [L], sv_val [L];
  logic [LW-1:0] sv_par [L];
  logic [LOG_S_MAX-1:0] sv_k [L];
  sllr_t sv_llr [L][NS_MAX/2];
  logic sv_gam [L][2];
  logic [3:0] sv_eps [L][2];
  logic [SLLR_W-1:0] sv_mag [L][2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rsu #(.L(L)) dut (.clk(clk), .start(start), .s(s), .sd(sd), .v(v), .np(np), .llr_in(llr_in),
    .pm_in(pm_in), .val_in(val_in), .sv_par(sv_par), .sv_k(sv_k), .sv_pm(sv_pm), .sv_val(sv_val),
    .sv_llr(sv_llr), .sv_gam(sv_gam), .sv_eps(sv_eps), .sv_mag(sv_mag));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit seq_el(input int k, input int m);
    if (sd == 1) return (m == 0) ? k[0] : 1'b0;
    return ((((m >> 1) & 1) == 0) ? k[0] : 1'b0) ^ (((m & 1) == 0) ? k[1] : 1'b0);
  endfunction

  function automatic int src_llr(input int l, input int k, input int j);
    int r, nr, a;
    nr = 1 << (s - sd);
    a  = 0;
    for (int m = 0; m < (1 << sd); m++)
      a += seq_el(k, m) ? -int'(llr_in[l][m * nr + j]) : int'(llr_in[l][m * nr + j]);
    return a;
  endfunction

  function automatic int cand_pm(input int l, input int k);
    int nr, c, mn [2];
    bit par [2];
    nr = 1 << (s - sd);
    c  = int'(pm_in[l]);
    for (int m = 0; m < (1 << sd); m++)
      for (int j = 0; j < nr; j++) begin
        bit hs, hk;
        int x;
        x  = int'(llr_in[l][m * nr + j]);
        hs = x < 0;
        hk = (src_llr(l, k, j) < 0) ^ seq_el(k, m);
        if (hs != hk) c += (x < 0) ? -x : x;
      end
    mn[0] = 1 << 20; mn[1] = 1 << 20; par[0] = 0; par[1] = 0;
    for (int j = 0; j < nr; j++) begin
      int a, g;
      a = src_llr(l, k, j);
      g = (np == 2) ? j % 2 : 0;
      par[g] ^= (a < 0);
      if (((a < 0) ? -a : a) < mn[g]) mn[g] = (a < 0) ? -a : a;
    end
    if (np >= 1 && par[0]) c += mn[0];
    if (np == 2 && par[1]) c += mn[1];
    return (c > int'(PM_MAX)) ? int'(PM_MAX) : c;
  endfunction

  initial begin
    for (int it = 0; it < 400; it++) begin
      int cands [$], got [$], nvalid, r;
      cands.delete();
      got.delete();
      np = 2'($urandom % 3);
      sd = 2'(1 + $urandom % 2);
      v  = 2'($urandom) & ((sd == 1) ? 2'b01 : 2'b11);
      r  = (np == 0) ? $urandom % (6 - sd) : 1 + $urandom % (5 - sd);
      if (np == 2 && r < 2) r = 2;
      s  = 4'(r + sd);
      nvalid = 1 + $urandom % L;
      for (int l = 0; l < L; l++) begin
        val_in[l] = l < nvalid;
        pm_in[l]  = pm_t'($urandom % 20);
        for (int i = 0; i < NS_MAX; i++)
          llr_in[l][i] = (i < (1 << s)) ? llr_t'(int'($urandom % 15) - 7) : '0;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      for (int l = 0; l < L; l++)
        for (int k = 0; k < (1 << sd); k++)
          if (val_in[l] && (k & ~int'(v)) == 0) cands.push_back(cand_pm(l, k));
      cands.sort();
      for (int p = 0; p < L; p++) begin
        if (!sv_val[p]) continue;
        got.push_back(int'(sv_pm[p]));
        checks += 3;
        if (!val_in[sv_par[p]] || (int'(sv_k[p]) & ~int'(v)) != 0 || int'(sv_k[p]) >= (1 << sd)) failures++;
        if (int'(sv_pm[p]) != cand_pm(sv_par[p], sv_k[p])) failures++;
        begin
          bit ok;
          ok = 1;
          for (int j = 0; j < (1 << (s - sd)); j++)
            if (int'(sv_llr[p][j]) != src_llr(sv_par[p], sv_k[p], j)) ok = 0;
          if (!ok) failures++;
        end
      end
      got.sort();
      checks++;
      if (got.size() != ((cands.size() < L) ? cands.size() : L)) begin failures++; if (failures < 4) $display("got %0d cands %0d", got.size(), cands.size()); end
      else
        for (int i = 0; i < got.size(); i++) begin
          checks++;
          if (got[i] != cands[i]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
