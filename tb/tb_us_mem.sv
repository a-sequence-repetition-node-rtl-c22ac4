// tb_us_mem -- test of the message-bit (Us) memory with 4 paths and N = 64.
// Each update copies row origin[l] into row l and writes the message bits of
// the node just decoded (the polar transform of its output bits beta, worked
// out here with an explicit butterfly) at positions base .. base + 2^s - 1.
// Nodes of random size are walked left to right over the code; 'clear' must
// zero every row.
module tb_us_mem;
  import srl_pkg::*;
  localparam int L = 4, NL = 6, N = 1 << NL, LW = 2;
  logic clk = 0, rst_n = 0, clear = 0, update = 0;
  logic [3:0] s = 0;
  logic [10:0] base = 0;
  logic [LW-1:0] origin [L];
  logic [NS_MAX-1:0] beta [L];
  logic [N-1:0] rows [L], model [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  us_mem #(.L(L), .N_LOG(NL)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .update(update),
    .s(s), .base(base), .origin(origin), .beta(beta), .rows(rows));

  function automatic logic [NS_MAX-1:0] transform(input logic [NS_MAX-1:0] x, input int sz);
    logic [NS_MAX-1:0] u;
    u = x;
    for (int h = 1; h < sz; h *= 2)
      for (int i = 0; i < sz; i++)
        if ((i & h) == 0) u[i] = u[i] ^ u[i + h];
    return u;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) begin origin[l] = '0; beta[l] = '0; model[l] = '0; end
    #12 rst_n = 1;
    for (int fr = 0; fr < 30; fr++) begin
      int pos;
      @(negedge clk);
      clear = 1;
      @(negedge clk);
      clear = 0;
      for (int l = 0; l < L; l++) begin
        model[l] = '0;
        checks++;
        if (rows[l] != '0) failures++;
      end
      pos = 0;
      while (pos < N) begin
        int sz, sl;
        logic [N-1:0] nm [L];
        // largest aligned node at pos, then a random size up to it
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
          logic [NS_MAX-1:0] u;
          nm[l] = model[origin[l]];
          u = transform(beta[l], sz);
          for (int j = 0; j < sz; j++) nm[l][pos + j] = u[j];
        end
        @(negedge clk);
        update = 0;
        model = nm;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (rows[l] != model[l]) failures++;
        end
        pos += sz;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
