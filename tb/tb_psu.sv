// tb_psu -- test of the partial-sum unit with 4 paths and N = 64.
// Nodes of random size are decoded left to right with random output bits and
// random surviving-path origins.  The testbench keeps, per path, the message
// bits decided so far (copied by origin).  Before every node it checks the
// partial sums the SC unit would read: for every stage t at which the next
// leaf is a right child, the stored vector must equal the re-encoded message
// bits of the left sibling block (its polar transform), read through the SCU
// view (rd_s = t + 1, one-stage step, chunk 0: z1[q] for q < 2^t), and through
// the two-stage view (z2) for t + 2.
module tb_psu;
  import srl_pkg::*;
  localparam int L = 4, NL = 6, N = 1 << NL, LW = 2;
  logic clk = 0, rst_n = 0, clear = 0, update = 0;
  logic [3:0] s = 0, rd_s = 1;
  logic [1:0] rd_nst = 1;
  logic [4:0] rd_c = 0;
  logic [10:0] base = 0;
  logic [LW-1:0] origin [L];
  logic [NS_MAX-1:0] beta [L];
  logic z1 [L][NPE], z2 [L][NPE/2];
  bit   um [L][N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  psu #(.L(L), .N_LOG(NL)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .update(update),
    .s(s), .base(base), .origin(origin), .beta(beta), .rd_s(rd_s), .rd_nst(rd_nst), .rd_c(rd_c),
    .z1(z1), .z2(z2));

  // polar encoding of message bits u[b .. b+sz-1] of path l
  function automatic void encode(input int l, input int b, input int sz, output bit x [N]);
    for (int i = 0; i < sz; i++) x[i] = um[l][b + i];
    for (int h = 1; h < sz; h *= 2)
      for (int i = 0; i < sz; i++)
        if ((i & h) == 0) x[i] = x[i] ^ x[i + h];
  endfunction

  task automatic check_sums(input int pos);
    for (int t = 0; t < NL; t++) begin
      if (((pos >> t) & 1) == 0) continue;
      begin
        int lb;
        lb = ((pos >> t) << t) - (1 << t);
        rd_s = 4'(t + 1); rd_nst = 2'd1; rd_c = 0;
        #1;
        for (int l = 0; l < L; l++) begin
          bit x [N];
          encode(l, lb, 1 << t, x);
          for (int q = 0; q < (1 << t) && q < NPE; q++) begin
            checks++;
            if (z1[l][q] != x[q]) begin failures++; if (failures < 6) $display("pos=%0d t=%0d l=%0d q=%0d z1=%0d exp=%0d", pos, t, l, q, z1[l][q], x[q]); end
          end
        end
        if (t + 2 <= NL) begin
          rd_s = 4'(t + 2); rd_nst = 2'd2; rd_c = 0;
          #1;
          for (int l = 0; l < L; l++) begin
            bit x [N];
            encode(l, lb, 1 << t, x);
            for (int q = 0; q < (1 << t) && q < NPE / 2; q++) begin
              checks++;
              if (z2[l][q] != x[q]) failures++;
            end
          end
        end
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) begin origin[l] = '0; beta[l] = '0; end
    #12 rst_n = 1;
    for (int fr = 0; fr < 30; fr++) begin
      int pos;
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int l = 0; l < L; l++) for (int i = 0; i < N; i++) um[l][i] = 0;
      pos = 0;
      while (pos < N) begin
        int sz, sl;
        bit nm [L][N];
        check_sums(pos);
        @(negedge clk);
        sl = 0;
        while (sl < 5 && (pos % (1 << (sl + 1))) == 0 && pos + (1 << (sl + 1)) <= N) sl++;
        sl = $urandom % (sl + 1);
        sz = 1 << sl;
        s = 4'(sl); base = 11'(pos); update = 1;
        for (int l = 0; l < L; l++) begin
          origin[l] = LW'($urandom);
          beta[l]   = NS_MAX'($urandom) & ((NS_MAX)'(64'hFFFFFFFF) >> (32 - sz));
        end
        for (int l = 0; l < L; l++) begin
          bit u [N];
          nm[l] = um[origin[l]];
          // message bits of the node: inverse transform of beta (involutory)
          for (int i = 0; i < sz; i++) u[i] = beta[l][i];
          for (int h = 1; h < sz; h *= 2)
            for (int i = 0; i < sz; i++)
              if ((i & h) == 0) u[i] = u[i] ^ u[i + h];
          for (int i = 0; i < sz; i++) nm[l][pos + i] = u[i];
        end
        @(negedge clk);
        update = 0;
        um = nm;
        pos += sz;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
