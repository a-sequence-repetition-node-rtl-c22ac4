// full_rank_sorter -- X-to-Y rank-order sorter (helper of partial_rank_sorter).
//
// Every pair of inputs is compared once (X(X-1)/2 comparators); the rank of
// input i is the number of inputs that are smaller, ties broken by position.
// The inputs with rank < Y are placed at output 'rank' (DESCEND = 0, ascending:
// out[0] is the smallest) or at output Y-1-rank (DESCEND = 1: out[Y-1] is the
// smallest, out[0] the Y-th smallest).  Each output carries the input's key and
// its index.  Purely combinational.
module full_rank_sorter #(
  parameter int unsigned X       = 16,
  parameter int unsigned Y       = 8,
  parameter int unsigned KW      = 8,
  parameter bit          DESCEND = 1'b0
) (
  input  logic [KW-1:0]        key_in  [X],
  output logic [KW-1:0]        key_out [Y],
  output logic [$clog2(X)-1:0] idx_out [Y]
);
  localparam int RW = $clog2(X) + 1;
  logic [RW-1:0] rank [X];

  always_comb begin
    logic [$clog2(Y)-1:0] pos;
    pos = '0;
    for (int i = 0; i < int'(X); i++) begin
      rank[i] = '0;
      for (int j = 0; j < int'(X); j++)
        if (j != i)
          if (key_in[j] < key_in[i] || (key_in[j] == key_in[i] && j < i))
            rank[i] = rank[i] + RW'(1);
    end
    for (int p = 0; p < int'(Y); p++) begin
      key_out[p] = '0;
      idx_out[p] = '0;
    end
    for (int i = 0; i < int'(X); i++)
      if (int'(rank[i]) < int'(Y)) begin
        pos = DESCEND ? ($clog2(Y))'(int'(Y) - 1 - int'(rank[i])) : ($clog2(Y))'(rank[i]);
        key_out[pos] = key_in[i];
        idx_out[pos] = ($clog2(X))'(i);
      end
  end
endmodule
