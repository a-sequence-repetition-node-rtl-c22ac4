// partial_rank_sorter -- X-to-Y partial rank-order sorter.
//
// Finds the Y smallest of X keys without ordering them.  The first X/2 inputs
// go to a full rank-order sorter that returns its Y smallest in ascending
// order (m_0 <= ... <= m_(Y-1)); the other X/2 go to one that returns its Y
// smallest in descending order (n_0 >= ... >= n_(Y-1)).  One layer of Y
// comparators then picks out_i = min(m_i, n_i).  The result is the Y smallest
// inputs (a half-cleaner of a bitonic merge).  Comparator count
// X^2/4 - X/2 + Y, e.g. 248 for 32-to-8 and 64 for 16-to-8.  The structure is
// the paper's (two half-size full sorters and a comparator layer); tie
// breaking (by input position, the ascending half winning ties) is this
// design's choice.  Requires Y <= X/2.  Outputs carry the input index.
// Purely combinational.
module partial_rank_sorter #(
  parameter int unsigned X  = 32,
  parameter int unsigned Y  = 8,
  parameter int unsigned KW = 8
) (
  input  logic [KW-1:0]        key_in  [X],
  output logic [KW-1:0]        key_out [Y],
  output logic [$clog2(X)-1:0] idx_out [Y]
);
  localparam int HW = $clog2(X / 2);

  logic [KW-1:0] ka [X/2], kd [X/2];
  logic [KW-1:0] m [Y], n [Y];
  logic [HW-1:0] mi [Y], ni [Y];

  always_comb
    for (int i = 0; i < int'(X / 2); i++) begin
      ka[i] = key_in[i];
      kd[i] = key_in[i + int'(X / 2)];
    end

  full_rank_sorter #(.X(X/2), .Y(Y), .KW(KW), .DESCEND(1'b0)) u_asc
    (.key_in(ka), .key_out(m), .idx_out(mi));
  full_rank_sorter #(.X(X/2), .Y(Y), .KW(KW), .DESCEND(1'b1)) u_desc
    (.key_in(kd), .key_out(n), .idx_out(ni));

  always_comb
    for (int i = 0; i < int'(Y); i++)
      if (n[i] < m[i]) begin
        key_out[i] = n[i];
        idx_out[i] = {1'b1, ni[i]};
      end else begin
        key_out[i] = m[i];
        idx_out[i] = {1'b0, mi[i]};
      end
endmodule
