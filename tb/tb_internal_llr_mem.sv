// tb_internal_llr_mem -- test of the pointer-addressed internal LLR memory
// (2 paths, N = 512).  SCU results are written for stage 7 (two-stage steps
// from the root, 4 chunks of 32) and for stages 5..0 (one-stage steps, one
// chunk).  Reads are then made with crossed bank pointers (path l reads bank
// 1 - l) and compared with the written vectors: the node view returns the
// first 32 LLRs of the stage, and the one-stage SCU view at stage s returns
// a = x[q], b = x[q + 2^(s-1)] for the lanes in use.
module tb_internal_llr_mem;
  import srl_pkg::*;
  localparam int L = 2, NL = 9;
  logic clk = 0, wr_en = 0;
  logic [3:0] wr_t = 0, rd_s = 0;
  logic [1:0] wr_nst = 1, rd_nst = 1;
  logic [4:0] wr_c = 0, rd_c = 0;
  llr_t wr_y1 [L][NPE], wr_y2 [L][NPE/2];
  logic [0:0] bank [L];
  llr_t rd_a [L][NPE], rd_b [L][NPE], node_llr [L][NS_MAX];
  llr_t x [L][8][128];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  internal_llr_mem #(.L(L), .N_LOG(NL)) dut (.clk(clk), .wr_en(wr_en), .wr_t(wr_t), .wr_nst(wr_nst),
    .wr_c(wr_c), .wr_y1(wr_y1), .wr_y2(wr_y2), .rd_bank(bank), .rd_s(rd_s), .rd_nst(rd_nst),
    .rd_c(rd_c), .rd_a(rd_a), .rd_b(rd_b), .node_llr(node_llr));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic llr_t rnd();
    return llr_t'(int'($urandom % 63) - 31);
  endfunction

  initial begin
    for (int l = 0; l < L; l++) begin
      bank[l] = 1'(l);
      for (int q = 0; q < NPE; q++) wr_y1[l][q] = '0;
      for (int q = 0; q < NPE / 2; q++) wr_y2[l][q] = '0;
    end
    for (int rep = 0; rep < 20; rep++) begin
      // stage 7: two-stage steps, 4 chunks of 32 results
      for (int c = 0; c < 4; c++) begin
        @(negedge clk);
        wr_en = 1; wr_t = 7; wr_nst = 2; wr_c = 5'(c);
        for (int l = 0; l < L; l++)
          for (int q = 0; q < 32; q++) begin
            wr_y2[l][q] = rnd();
            wr_y1[l][q] = rnd();
            x[l][7][32 * c + q] = wr_y2[l][q];
          end
      end
      // stages 5..0: one-stage steps, one chunk
      for (int t = 5; t >= 0; t--) begin
        @(negedge clk);
        wr_en = 1; wr_t = 4'(t); wr_nst = 1; wr_c = 0;
        for (int l = 0; l < L; l++)
          for (int q = 0; q < NPE; q++) begin
            wr_y1[l][q] = rnd();
            if (q < (1 << t)) x[l][t][q] = wr_y1[l][q];
          end
      end
      @(negedge clk);
      wr_en = 0;
      for (int l = 0; l < L; l++) bank[l] = 1'(1 - l);
      for (int t = 0; t <= 7; t++) begin
        if (t == 6) continue;
        rd_s = 4'(t); rd_nst = 1; rd_c = 0;
        #1;
        for (int l = 0; l < L; l++) begin
          for (int j = 0; j < NS_MAX && j < (1 << t); j++) begin
            checks++;
            if (node_llr[l][j] != x[1 - l][t][j]) failures++;
          end
          if (t >= 1)
            for (int q = 0; q < NPE && q < (1 << (t - 1)); q++) begin
              checks += 2;
              if (rd_a[l][q] != x[1 - l][t][q]) failures++;
              if (rd_b[l][q] != x[1 - l][t][q + (1 << (t - 1))]) failures++;
            end
        end
      end
      for (int l = 0; l < L; l++) bank[l] = 1'(l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
