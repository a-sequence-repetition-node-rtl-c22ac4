// tb_partial_rank_sorter -- random test of the 32-to-8 partial rank-order
// sorter (the sequence sorter of the SR-I stage) and of a 16-to-8 instance
// (the path sorter of the node units).  Outputs must be the 8 smallest keys
// (as a set: the final min-comparator stage leaves them unordered), each index must point at an input holding that key, and
// no index may repeat.  Keys are drawn from a small range so ties are common.
module tb_partial_rank_sorter;
  localparam int KW = 8;
  logic [KW-1:0] k32 [32], o32 [8], k16 [16], o16 [8];
  logic [4:0]    i32 [8];
  logic [3:0]    i16 [8];
  int checks = 0, failures = 0;

  partial_rank_sorter #(.X(32), .Y(8), .KW(KW)) dut32 (.key_in(k32), .key_out(o32), .idx_out(i32));
  partial_rank_sorter #(.X(16), .Y(8), .KW(KW)) dut16 (.key_in(k16), .key_out(o16), .idx_out(i16));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int x, input logic [KW-1:0] kin [], input logic [KW-1:0] kout [8],
                       input int idx [8]);
    logic [KW-1:0] srt [];
    bit used [];
    srt = new[x];
    used = new[x];
    foreach (kin[i]) srt[i] = kin[i];
    srt.sort();
    begin
      logic [KW-1:0] got [];
      got = new[8];
      for (int p = 0; p < 8; p++) got[p] = kout[p];
      got.sort();
      for (int p = 0; p < 8; p++) begin
        checks++;
        if (got[p] != srt[p]) failures++;
      end
    end
    for (int p = 0; p < 8; p++) begin
      checks += 2;
      if (kin[idx[p]] != kout[p]) failures++;
      if (used[idx[p]]) failures++;
      used[idx[p]] = 1'b1;
    end
  endtask

  initial begin
    for (int it = 0; it < 3000; it++) begin
      logic [KW-1:0] a [], b [], oa [8], ob [8];
      int ia [8], ib [8];
      int range;
      range = (it % 3 == 0) ? 8 : 256;
      a = new[32];
      b = new[16];
      for (int i = 0; i < 32; i++) begin a[i] = KW'($urandom % range); k32[i] = a[i]; end
      for (int i = 0; i < 16; i++) begin b[i] = KW'($urandom % range); k16[i] = b[i]; end
      #1;
      for (int p = 0; p < 8; p++) begin
        oa[p] = o32[p]; ia[p] = int'(i32[p]);
        ob[p] = o16[p]; ib[p] = int'(i16[p]);
      end
      check(32, a, oa, ia);
      check(16, b, ob, ib);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
