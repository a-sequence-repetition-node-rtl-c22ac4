// tb_bnu -- random test of the basic node unit on its own (direct R0, REP,
// R1, SPC and TYPE-III nodes; SR nodes reach it through the RSU and are
// tested in the NPU testbench), L = 8, fork limits T = [2, 3, 3].
// Each trial draws a node of 2^s leaves (s = 0..5 as the type allows), random
// LLRs and 1 to 8 valid input paths with random metrics.  Every valid output path is checked independently of the
// unit's algorithm:
//   - its bits form a codeword of the node (SR: the source word repeated with
//     an allowed repetition sequence, the source word in its G-PC code);
//   - its metric equals, up to one common offset, the parent's metric plus
//     the sum of |LLR| over the bits that disagree with the LLR signs, and the
//     smallest output metric is 0 (metric normalisation);
//   - no two outputs are the same (parent, codeword) pair;
//   - with a single input path and a node of at most 16 leaves, the best
//     output is the maximum-likelihood codeword (brute force);
//   - 'done' comes exactly at the latency of the NPU latency table.
module tb_bnu;
  import srl_pkg::*;
  localparam int L = 8, LW = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  node_e ntype;
  logic [3:0] s;
  logic [1:0] sd, v, np;
  llr_t llr_in [L][NS_MAX];
  pm_t  pm_in [L], out_pm [L];
  logic val_in [L], out_val [L];
  logic [LW-1:0] out_org [L];
  logic [NS_MAX-1:0] out_beta [L];
  int checks = 0, failures = 0;
  int cnt_type [6] = '{default: 0};
  always #5 clk = ~clk;

  logic [LW-1:0]        sv_par [L];
  logic [LOG_S_MAX-1:0] sv_k   [L];
  pm_t                  sv_pm  [L];
  logic                 sv_val [L], sv_gam [L][2];
  sllr_t                sv_llr [L][NS_MAX/2];
  logic [3:0]           sv_eps [L][2];
  logic [SLLR_W-1:0]    sv_mag [L][2];
  assign sv_par = '{default: '0};
  assign sv_k   = '{default: '0};
  assign sv_pm  = '{default: '0};
  assign sv_val = '{default: 1'b0};
  assign sv_gam = '{default: '{default: 1'b0}};
  assign sv_llr = '{default: '{default: '0}};
  assign sv_eps = '{default: '{default: '0}};
  assign sv_mag = '{default: '{default: '0}};

  bnu #(.L(L)) dut (.clk(clk), .rst_n(rst_n), .start(start), .ntype(ntype), .s(s), .llr_in(llr_in),
    .pm_in(pm_in), .val_in(val_in), .load_sr(1'b0), .sr_sd(2'd0), .sr_np(2'd0), .sv_par(sv_par),
    .sv_k(sv_k), .sv_pm(sv_pm), .sv_val(sv_val), .sv_llr(sv_llr), .sv_gam(sv_gam), .sv_eps(sv_eps),
    .sv_mag(sv_mag), .busy(busy), .done(done),
    .out_org(out_org), .out_beta(out_beta), .out_pm(out_pm), .out_val(out_val));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int imin(input int a, input int b);
    return (a < b) ? a : b;
  endfunction

  function automatic int latency();
    int nr;
    case (ntype)
      NT_R0:  return 1;
      NT_REP: return 2;
      NT_R1:  return 1 + imin(T_R1_DEF, 1 << s);
      NT_SPC: return 2 + imin(T_SPC_DEF, (1 << s) - 1);
      NT_T3:  return 2 + imin(T_T3_DEF, (1 << s) - 2);
      default: begin
        nr = 1 << (s - sd);
        if (np == 0) return 2 + imin(T_R1_DEF, nr);
        if (np == 1) return 3 + imin(T_SPC_DEF, nr - 1);
        return 3 + imin(T_T3_DEF, nr - 2);
      end
    endcase
  endfunction

  // G-PC membership of the first n bits of w with np parity groups
  function automatic bit gpc_ok(input logic [NS_MAX-1:0] w, input int n, input int npv);
    bit pe, po;
    pe = 0; po = 0;
    for (int i = 0; i < n; i++) if (i % 2 == 0) pe ^= w[i]; else po ^= w[i];
    if (npv == 0) return 1;
    if (npv == 1) return (pe ^ po) == 0;
    return pe == 0 && po == 0;
  endfunction

  function automatic bit member(input logic [NS_MAX-1:0] w);
    int n, nr;
    n = 1 << s;
    case (ntype)
      NT_R0:  begin for (int i = 0; i < n; i++) if (w[i]) return 0; return 1; end
      NT_REP: begin for (int i = 0; i < n; i++) if (w[i] != w[0]) return 0; return 1; end
      NT_R1:  return 1;
      NT_SPC: return gpc_ok(w, n, 1);
      NT_T3:  return gpc_ok(w, n, 2);
      default: begin
        logic [NS_MAX-1:0] src;
        logic [3:0] sq;
        int m_last;
        nr = 1 << (s - sd);
        m_last = (1 << sd) - 1;
        src = '0;
        for (int j = 0; j < nr; j++) src[j] = w[m_last * nr + j];
        if (!gpc_ok(src, nr, np)) return 0;
        // repetition pattern: must be constant over j and an allowed sequence
        sq = '0;
        for (int m = 0; m < (1 << sd); m++) begin
          sq[m] = w[m * nr] ^ src[0];
          for (int j = 0; j < nr; j++) if ((w[m * nr + j] ^ src[j]) != sq[m]) return 0;
        end
        for (int k = 0; k < (1 << sd); k++) begin
          logic [3:0] ref_sq;
          if ((k & ~int'(v)) != 0) continue;
          // left part of stage s-1 with value eta0 covers elements m with
          // the top bit clear; the stage s-2 part eta1 covers elements
          // with bit 0 clear (sd = 2)
          ref_sq = '0;
          for (int m = 0; m < (1 << sd); m++) begin
            if (sd == 1) ref_sq[m] = (m == 0) ? k[0] : 1'b0;
            else ref_sq[m] = (((m >> 1) & 1) == 0 ? k[0] : 1'b0) ^ ((m & 1) == 0 ? k[1] : 1'b0);
          end
          if (ref_sq == sq) return 1;
        end
        return 0;
      end
    endcase
  endfunction

  function automatic int cost(input int l, input logic [NS_MAX-1:0] w);
    int c;
    c = 0;
    for (int i = 0; i < (1 << s); i++)
      if (w[i] != llr_in[l][i][LLR_W-1]) c += (llr_in[l][i] < 0) ? -int'(llr_in[l][i]) : int'(llr_in[l][i]);
    return c;
  endfunction

  task automatic trial();
    int t, lat, nvalid, cyc, refpm [L], off, first, maxmag;
    bit single;
    t = $urandom % 5;
    ntype = node_e'(t);
    sd = 0; v = 0; np = 0;
    case (ntype)
      NT_R0, NT_REP, NT_R1: s = 4'($urandom % 6);
      NT_SPC: s = 4'(1 + $urandom % 5);
      NT_T3:  s = 4'(2 + $urandom % 4);
      default: begin
        np = 2'($urandom % 3);
        sd = 2'(1 + $urandom % 2);
        v  = 2'($urandom) & ((sd == 1) ? 2'b01 : 2'b11);
        s  = 4'(sd + ((np == 0) ? $urandom % (5 - sd) : 1 + np / 2 + $urandom % (4 - sd - np / 2)));
        if (np == 1 && s - sd < 1) s = 4'(sd + 1);
        if (np == 2 && s - sd < 2) s = 4'(sd + 2);
      end
    endcase
    cnt_type[t]++;
    single = ($urandom % 3) == 0;
    maxmag = (s >= 4) ? 4 : 15;
    nvalid = single ? 1 : 1 + $urandom % L;
    for (int l = 0; l < L; l++) begin
      val_in[l] = (l < nvalid);
      pm_in[l]  = single ? '0 : pm_t'($urandom % 12);
      for (int i = 0; i < NS_MAX; i++)
        llr_in[l][i] = (i < (1 << s)) ? llr_t'(int'($urandom % (2 * maxmag + 1)) - maxmag) : '0;
    end
    lat = latency();
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 40) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != lat) begin failures++; $display("type %0d s=%0d sd=%0d np=%0d: latency %0d, expected %0d", t, s, sd, np, cyc, lat); end
    first = 1;
    off = 0;
    for (int p = 0; p < L; p++) begin
      if (!out_val[p]) continue;
      checks += 3;
      if (!val_in[out_org[p]]) failures++;
      if (!member(out_beta[p])) begin
        failures++;
        $display("type %0d s=%0d sd=%0d v=%0d np=%0d: output %0d not a codeword %b", t, s, sd, v, np, p, out_beta[p]);
      end
      refpm[p] = int'(pm_in[out_org[p]]) + cost(out_org[p], out_beta[p]);
      if (first) begin off = refpm[p] - int'(out_pm[p]); first = 0; end
      if (refpm[p] - int'(out_pm[p]) != off) begin
        failures++;
        $display("type %0d s=%0d sd=%0d np=%0d: metric of %0d is %0d, reference %0d (offset %0d)", t, s, sd, np, p, out_pm[p], refpm[p], off);
      end
      for (int p2 = 0; p2 < p; p2++)
        if (out_val[p2] && out_org[p2] == out_org[p] && out_beta[p2] == out_beta[p]) failures++;
    end
    checks++;
    if (first) failures++;                  // no valid output at all
    else begin
      int mn;
      mn = 1 << 20;
      for (int p = 0; p < L; p++) if (out_val[p] && int'(out_pm[p]) < mn) mn = int'(out_pm[p]);
      checks++;
      if (mn != 0) failures++;
      if (single && s <= 4) begin
        int ml;
        ml = 1 << 20;
        for (int w = 0; w < (1 << (1 << s)); w++)
          if (member(NS_MAX'(w))) ml = imin(ml, cost(0, NS_MAX'(w)));
        checks++;
        if (ml != off) begin failures++; $display("type %0d s=%0d sd=%0d np=%0d: best metric %0d, ML %0d", t, s, sd, np, off, ml); end
      end
    end
  endtask

  initial begin
    ntype = NT_R0; s = 0; sd = 0; v = 0; np = 0;
    for (int l = 0; l < L; l++) begin val_in[l] = 0; pm_in[l] = '0; for (int i = 0; i < NS_MAX; i++) llr_in[l][i] = '0; end
    #12 rst_n = 1;
    for (int it = 0; it < 600; it++) trial();
    for (int t = 0; t < 5; t++) begin
      checks++;
      if (cnt_type[t] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
