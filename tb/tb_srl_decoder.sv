// tb_srl_decoder -- end-to-end test of the SR-List decoder at its default
// parameters (N up to 512, L = 8, |S|max = 4, T = [2, 3, 3]).
//
// For each frame the testbench builds a polar code (frozen set from the
// beta-expansion reliability order w(i) = sum_b bit_b(i) 2^(b/4), not the 3GPP
// sequence), draws a random message, appends CRC-24C, encodes, sends BPSK over
// AWGN (Box-Muller on $urandom) or a noiseless channel, quantises the LLRs to
// Q6.2 and writes them into the channel memory.  It then compiles the code's
// decoding schedule: the tree is walked depth-first, leading all-frozen
// subtrees are skipped, nodes of at most 32 leaves are matched against R0,
// REP, R1, SPC, TYPE-III and SR patterns (sd = s - r of 1 or 2, left nodes R0
// or REP, source R1/SPC/TYPE-III), and one- or two-stage SCU steps are chosen
// by which stages the internal LLR memory keeps.
// Checks per frame: the decoded message equals the one sent, the CRC passes,
// and the cycle count from 'start' to 'dec_valid' equals
//   sum over SCU steps of their chunk count + sum over nodes of (latency + 1)
//   + 2^9/64 + 2 (CRC unit plus the END instruction cycle),
// with the node latencies of the NPU latency table.  Mechanisms counted (a
// failure is counted for any that never occurs): every node type, SR nodes
// with a REP left part, SR with one and two stages, SR with each source type,
// one- and two-stage SCU steps, skipped leading frozen subtrees, decoder
// stalls on an empty instruction FIFO, early release of the channel memory,
// path forks, and codes of 128, 256 and 512 bits.
module tb_srl_decoder;
  import srl_pkg::*;

  localparam int NL   = N_LOG_DEF;
  localparam int NMAX = 1 << NL;
  localparam int NB   = NMAX / 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic            llr_wr_en = 1'b0;
  logic [NL-1:0]   llr_wr_blk = '0;
  llr_t            llr_wr_data [NPE];
  logic            instr_valid = 1'b0, instr_ready;
  instr_t          instr_data;
  logic            start = 1'b0;
  logic [3:0]      n_root = 4'(NL);
  logic [NMAX-1:0] info_mask = '0;
  logic            busy, stall, chan_free, dec_valid, crc_ok;
  logic [NMAX-1:0] u_out;

  srl_decoder dut (
    .clk(clk), .rst_n(rst_n), .llr_wr_en(llr_wr_en), .llr_wr_blk(llr_wr_blk),
    .llr_wr_data(llr_wr_data), .instr_valid(instr_valid), .instr_ready(instr_ready),
    .instr_data(instr_data), .start(start), .n_root(n_root), .info_mask(info_mask),
    .busy(busy), .stall(stall), .chan_free(chan_free), .dec_valid(dec_valid),
    .crc_ok(crc_ok), .u_out(u_out));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ mechanism counters
  int n_type [6] = '{default: 0};
  int n_src  [3] = '{default: 0};
  int n_code [3] = '{default: 0};
  int n_sr_rep = 0, n_sr1 = 0, n_sr2 = 0;
  int n_scu1 = 0, n_scu2 = 0, n_skip = 0, n_stall = 0, n_chfree = 0, n_fork = 0;

  always @(posedge clk) begin
    if (stall) n_stall++;
    if (3'(dut.u_npu.u_bnu.state) == 3'd3) n_fork++;  // S_FORK
  end

  // ------------------------------------------------------------ code construction
  int  n, nlog, kk;
  bit  frz [NMAX];          // 1 = information leaf
  int  first_info;

  task automatic build_code(input int nl, input int k);
    real w [NMAX];
    bit  used [NMAX];
    nlog = nl;
    n    = 1 << nl;
    kk   = k;
    for (int i = 0; i < NMAX; i++) begin
      frz[i]  = 1'b0;
      used[i] = 1'b0;
      w[i]    = 0.0;
      for (int b = 0; b < nl; b++)
        if (((i >> b) & 1) != 0) w[i] += 2.0 ** (real'(b) / 4.0);
    end
    for (int c = 0; c < k; c++) begin
      int best;
      best = -1;
      for (int i = 0; i < n; i++)
        if (!used[i] && (best < 0 || w[i] > w[best])) best = i;
      used[best] = 1'b1;
      frz[best]  = 1'b1;
    end
    first_info = n;
    for (int i = n - 1; i >= 0; i--) if (frz[i]) first_info = i;
  endtask

  // ------------------------------------------------------------ schedule compiler
  instr_t prog [$];
  int     exp_cycles;

  function automatic int cnt_info(input int base, input int sz);
    int c;
    c = 0;
    for (int i = 0; i < sz; i++) c += frz[base + i];
    return c;
  endfunction

  function automatic bit is_r0(input int base, input int sz);
    return cnt_info(base, sz) == 0;
  endfunction

  function automatic bit is_rep(input int base, input int sz);
    return cnt_info(base, sz) == 1 && frz[base + sz - 1];
  endfunction

  // G-PC pattern: np leading frozen bits, the rest information; -1 if none
  function automatic int gpc_np(input int base, input int sz);
    for (int np = 0; np <= 2; np++) begin
      bit ok;
      if (np > 0 && sz < 4) continue;
      if (sz - np < 1) continue;
      ok = 1'b1;
      for (int i = 0; i < sz; i++) if (frz[base + i] != (i >= np)) ok = 1'b0;
      if (ok) return np;
    end
    return -1;
  endfunction

  // node classification; returns 0 if the node is not decoded directly
  function automatic bit classify(input int s, input int base, output instr_t ins);
    int sz, np;
    sz  = 1 << s;
    ins = '0;
    ins.op    = OP_NODE;
    ins.stage = 4'(s);
    ins.base  = 11'(base);
    if (s > int'(LOG_NS_MAX)) return 1'b0;
    if (is_r0(base, sz))  begin ins.ntype = NT_R0;  return 1'b1; end
    if (is_rep(base, sz)) begin ins.ntype = NT_REP; return 1'b1; end
    np = gpc_np(base, sz);
    if (np == 0) begin ins.ntype = NT_R1;  return 1'b1; end
    if (np == 1) begin ins.ntype = NT_SPC; ins.np = 2'd1; return 1'b1; end
    if (np == 2) begin ins.ntype = NT_T3;  ins.np = 2'd2; return 1'b1; end
    // SR, one stage: (R0|REP) at s-1, G-PC source at s-1
    if (s >= 1) begin
      int h;
      h  = sz / 2;
      np = gpc_np(base + h, h);
      if ((is_r0(base, h) || is_rep(base, h)) && np >= 0) begin
        ins.ntype = NT_SR; ins.sd = 2'd1; ins.np = 2'(np);
        ins.v = {1'b0, is_rep(base, h) && !is_r0(base, h)};
        return 1'b1;
      end
    end
    // SR, two stages: (R0|REP) at s-1, (R0|REP) at s-2, G-PC source at s-2
    if (s >= 2) begin
      int h, q;
      h  = sz / 2;
      q  = sz / 4;
      np = gpc_np(base + h + q, q);
      if ((is_r0(base, h) || is_rep(base, h)) &&
          (is_r0(base + h, q) || is_rep(base + h, q)) && np >= 0) begin
        ins.ntype = NT_SR; ins.sd = 2'd2; ins.np = 2'(np);
        ins.v = {is_rep(base + h, q) && !is_r0(base + h, q),
                 is_rep(base, h) && !is_r0(base, h)};
        return 1'b1;
      end
    end
    return 1'b0;
  endfunction

  function automatic int fork_cnt(input int lim, input int kmax);
    return (lim < kmax) ? lim : kmax;
  endfunction

  // NPU latency (without the update cycle)
  function automatic int node_lat(input instr_t ins);
    int nr;
    case (ins.ntype)
      NT_R0:  return 1;
      NT_REP: return 2;
      NT_R1:  return 1 + fork_cnt(T_R1_DEF, 1 << ins.stage);
      NT_SPC: return 2 + fork_cnt(T_SPC_DEF, (1 << ins.stage) - 1);
      NT_T3:  return 2 + fork_cnt(T_T3_DEF, (1 << ins.stage) - 2);
      default: begin
        nr = 1 << (ins.stage - 4'(ins.sd));
        if (ins.np == 2'd0) return 2 + fork_cnt(T_R1_DEF, nr);
        if (ins.np == 2'd1) return 3 + fork_cnt(T_SPC_DEF, nr - 1);
        return 3 + fork_cnt(T_T3_DEF, nr - 2);
      end
    endcase
  endfunction

  function automatic bit lead_frozen(input int s, input int base);
    return base + (1 << s) <= first_info;
  endfunction

  function automatic bit stored(input int t);
    return stage_stored(t, NL) != 0;
  endfunction

  function automatic void emit_scu(input int s, input int nst, input int f1, input int f2);
    instr_t ins;
    ins       = '0;
    ins.op    = OP_SCU;
    ins.stage = 4'(s);
    ins.nst   = 2'(nst);
    ins.fg    = {1'(f2), 1'(f1)};
    prog.push_back(ins);
    exp_cycles += scu_chunks(s, nst);
    if (nst == 1) n_scu1++; else n_scu2++;
  endfunction

  function automatic void decode_node(input int s, input int base);
    instr_t ins;
    if (lead_frozen(s, base)) begin n_skip++; return; end
    if (classify(s, base, ins)) begin
      prog.push_back(ins);
      exp_cycles += node_lat(ins) + 1;
      n_type[int'(ins.ntype)]++;
      if (ins.ntype == NT_SR) begin
        if (ins.v != 2'b00) n_sr_rep++;
        if (ins.sd == 2'd1) n_sr1++; else n_sr2++;
        n_src[ins.np]++;
      end
      return;
    end
    for (int b = 0; b < 2; b++) begin
      int cb;
      instr_t dummy;
      cb = base + b * (1 << (s - 1));
      if (lead_frozen(s - 1, cb)) begin n_skip++; continue; end
      if (stored(s - 1) && (classify(s - 1, cb, dummy) || !stored(s - 2) || s - 1 == 0)) begin
        emit_scu(s, 1, b, 0);
        decode_node(s - 1, cb);
      end else begin
        for (int d = 0; d < 2; d++) begin
          int gb;
          gb = cb + d * (1 << (s - 2));
          if (lead_frozen(s - 2, gb)) begin n_skip++; continue; end
          emit_scu(s, 2, b, d);
          decode_node(s - 2, gb);
        end
      end
    end
  endfunction

  // ------------------------------------------------------------ encoder and channel
  bit   u   [NMAX];
  bit   x   [NMAX];
  llr_t ch  [NMAX];

  function automatic logic [23:0] crc24(input bit msg [], input int len);
    logic [23:0] c;
    c = '0;
    for (int i = 0; i < len; i++) begin
      logic fb;
      fb = c[23] ^ msg[i];
      c  = {c[22:0], 1'b0} ^ (fb ? 24'hB2B117 : 24'h0);
    end
    return c;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  task automatic make_frame(input real ebn0_db, input bit noiseless);
    bit   msg [];
    int   a, j;
    logic [23:0] c;
    real  rate, esn0, sigma2;
    a   = kk - 24;
    msg = new[a];
    for (int i = 0; i < a; i++) msg[i] = 1'($urandom);
    c = crc24(msg, a);
    for (int i = 0; i < NMAX; i++) u[i] = 1'b0;
    j = 0;
    for (int i = 0; i < n; i++)
      if (frz[i]) begin
        u[i] = (j < a) ? msg[j] : c[23 - (j - a)];
        j++;
      end
    for (int i = 0; i < n; i++) x[i] = u[i];
    for (int t = 0; t < nlog; t++)
      for (int i = 0; i < n; i++)
        if (((i >> t) & 1) == 0) x[i] = x[i] ^ x[i + (1 << t)];
    rate   = real'(a) / real'(n);
    esn0   = 10.0 ** ((ebn0_db + 10.0 * $log10(rate)) / 10.0);
    sigma2 = 1.0 / (2.0 * esn0);
    for (int i = 0; i < NMAX; i++) begin
      real y, l4;
      int  q;
      y  = x[i] ? -1.0 : 1.0;
      if (!noiseless) y += $sqrt(sigma2) * gauss();
      l4 = 4.0 * 2.0 * y / sigma2;
      q  = (l4 >= 0.0) ? int'(l4 + 0.5) : -int'(-l4 + 0.5);
      if (q > 31) q = 31;
      if (q < -31) q = -31;
      ch[i] = (i < n) ? llr_t'(q) : '0;
    end
  endtask

  // ------------------------------------------------------------ driving
  task automatic load_llrs();
    for (int b = 0; b < NMAX / 64; b++) begin
      @(negedge clk);
      llr_wr_en  = 1'b1;
      llr_wr_blk = NL'(b);
      for (int q = 0; q < 64; q++) llr_wr_data[q] = ch[b * 64 + q];
    end
    @(negedge clk);
    llr_wr_en = 1'b0;
  endtask

  task automatic push_prog(input int gap);
    foreach (prog[i]) begin
      @(negedge clk);
      instr_valid = 1'b1;
      instr_data  = prog[i];
      @(posedge clk);
      while (!instr_ready) @(posedge clk);
      @(negedge clk);
      instr_valid = 1'b0;
      repeat (gap) @(negedge clk);
    end
  endtask

  task automatic run_frame(input int nl, input int k, input real ebn0, input bit noiseless,
                           input bit slow_push, input int code_id);
    int t0, t1;
    bit chf;
    instr_t e;
    build_code(nl, k);
    make_frame(ebn0, noiseless);
    prog.delete();
    exp_cycles = 0;
    decode_node(nl, 0);
    e = '0;
    e.op = OP_END;
    prog.push_back(e);
    exp_cycles += NB + 2;
    load_llrs();
    for (int i = 0; i < NMAX; i++) info_mask[i] = (i < n) ? frz[i] : 1'b0;
    n_root = 4'(nl);
    if (!slow_push) push_prog(0);
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    t0 = cyc - 1;
    if (slow_push) push_prog(3);
    chf = 1'b0;
    while (!dec_valid) begin
      @(posedge clk);
      #1;
      if (chan_free && busy && !dec_valid) chf = 1'b1;
    end
    t1 = cyc - 1;
    if (chf) n_chfree++;
    n_code[code_id]++;
    checks++;
    if (!crc_ok) begin failures++; $display("frame N=%0d K=%0d: CRC failed", n, kk); end
    checks++;
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < NMAX; i++) if (u_out[i] != ((i < n) ? u[i] : 1'b0)) bad++;
      if (bad != 0) begin
        failures++;
        $display("frame N=%0d K=%0d: %0d wrong message bits", n, kk, bad);
      end
    end
    if (!slow_push) begin
      checks++;
      if (t1 - t0 != exp_cycles) begin
        failures++;
        $display("frame N=%0d K=%0d: %0d cycles, expected %0d", n, kk, t1 - t0, exp_cycles);
      end
    end
    $display("frame N=%0d K=%0d instr=%0d cycles=%0d (expected %0d)%s", n, kk, prog.size(),
             t1 - t0, exp_cycles, slow_push ? " slow feed" : "");
    @(negedge clk);
  endtask

  initial begin
    for (int q = 0; q < 64; q++) llr_wr_data[q] = '0;
    instr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_frame(9, 164, 0.0, 1'b1, 1'b0, 2);   // (512,164) noiseless
    run_frame(9, 164, 3.0, 1'b0, 1'b0, 2);   // (512,164) AWGN
    run_frame(8, 164, 5.0, 1'b0, 1'b0, 1);   // (256,164)
    run_frame(7, 36,  0.0, 1'b1, 1'b0, 0);   // (128,36) noiseless
    run_frame(7, 36,  6.0, 1'b0, 1'b0, 0);   // (128,36)
    run_frame(9, 164, 3.0, 1'b0, 1'b1, 2);   // slow instruction feed: stalls
    run_frame(8, 164, 5.0, 1'b0, 1'b0, 1);
    begin
      static string nm [6] = '{"R0", "REP", "R1", "SPC", "TYPE-III", "SR"};
      for (int t = 0; t < 6; t++) begin
        checks++;
        if (n_type[t] == 0) begin failures++; $display("no %s node decoded", nm[t]); end
      end
    end
    checks += 11;
    if (n_sr_rep == 0) begin failures++; $display("no SR node with a REP part"); end
    if (n_sr1 == 0)    begin failures++; $display("no one-stage SR node"); end
    if (n_sr2 == 0)    begin failures++; $display("no two-stage SR node"); end
    if (n_scu1 == 0)   begin failures++; $display("no one-stage SCU step"); end
    if (n_scu2 == 0)   begin failures++; $display("no two-stage SCU step"); end
    if (n_skip == 0)   begin failures++; $display("no leading frozen subtree skipped"); end
    if (n_stall == 0)  begin failures++; $display("no stall"); end
    if (n_chfree == 0) begin failures++; $display("channel memory never released early"); end
    if (n_fork == 0)   begin failures++; $display("no path fork"); end
    if (n_code[0] == 0 || n_code[1] == 0) begin failures++; $display("code size missing"); end
    if (n_src[0] == 0 || n_src[1] == 0) begin failures++; $display("SR source type missing"); end
    $display("nodes R0=%0d REP=%0d R1=%0d SPC=%0d T3=%0d SR=%0d (sd1=%0d sd2=%0d rep=%0d src=%0d/%0d/%0d)",
             n_type[0], n_type[1], n_type[2], n_type[3], n_type[4], n_type[5],
             n_sr1, n_sr2, n_sr_rep, n_src[0], n_src[1], n_src[2]);
    $display("scu1=%0d scu2=%0d skip=%0d stall=%0d chfree=%0d fork=%0d",
             n_scu1, n_scu2, n_skip, n_stall, n_chfree, n_fork);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
