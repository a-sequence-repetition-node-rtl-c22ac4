// tb_channel_llr_mem -- test of the channel LLR memory at N = 512.
// A random codeword of LLRs is written 64 per cycle; then, for every root
// stage, step width and chunk, the SCU operands are compared with the
// addressing worked out here: one-stage steps take a = x[64c+q],
// b = x[64c+q+2^(s-1)]; two-stage steps take, for lanes q < 32,
// a = x[32c+q], b = x[32c+q+2^(s-1)] and, for lanes q >= 32, the same shifted
// by 2^(s-2).  The node view must return the first 32 LLRs.
module tb_channel_llr_mem;
  import srl_pkg::*;
  localparam int NL = 9, N = 1 << NL;
  logic clk = 0, wr_en = 0;
  logic [NL-1:0] wr_blk = '0;
  llr_t wr_data [NPE], rd_a [NPE], rd_b [NPE], node_llr [NS_MAX];
  logic [3:0] rd_s = 0;
  logic [1:0] rd_nst = 1;
  logic [4:0] rd_c = 0;
  llr_t x [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  channel_llr_mem #(.N_LOG(NL)) dut (.clk(clk), .wr_en(wr_en), .wr_blk(wr_blk), .wr_data(wr_data),
    .rd_s(rd_s), .rd_nst(rd_nst), .rd_c(rd_c), .rd_a(rd_a), .rd_b(rd_b), .node_llr(node_llr));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) x[i] = llr_t'(int'($urandom % 63) - 31);
    for (int bk = 0; bk < N / 64; bk++) begin
      @(negedge clk);
      wr_en = 1; wr_blk = NL'(bk);
      for (int q = 0; q < 64; q++) wr_data[q] = x[bk * 64 + q];
    end
    @(negedge clk);
    wr_en = 0;
    for (int s = 1; s <= NL; s++)
      for (int nst = 1; nst <= 2; nst++) begin
        int outs, w, nch;
        if (nst == 2 && s < 2) continue;
        outs = 1 << (s - nst);
        w    = (nst == 1) ? 64 : 32;
        nch  = (outs <= w) ? 1 : outs / w;
        for (int c = 0; c < nch; c++) begin
          rd_s = 4'(s); rd_nst = 2'(nst); rd_c = 5'(c);
          #1;
          for (int q = 0; q < 64; q++) begin
            int ia, ib;
            if (nst == 1) begin
              if (q >= outs) continue;
              ia = 64 * c + q;
              ib = ia + (1 << (s - 1));
            end else begin
              if ((q % 32) >= outs) continue;
              ia = 32 * c + (q % 32) + ((q >= 32) ? (1 << (s - 2)) : 0);
              ib = ia + (1 << (s - 1));
            end
            checks += 2;
            if (rd_a[q] != x[ia]) failures++;
            if (rd_b[q] != x[ib]) failures++;
          end
        end
      end
    for (int j = 0; j < NS_MAX; j++) begin
      checks++;
      if (node_llr[j] != x[j]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
