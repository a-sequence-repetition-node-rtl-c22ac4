// us_mem -- decoded message bits (u) of every path.
//
// One row of 2^N_LOG bits per path.  After each node (stage s, first leaf
// 'base'), in the same cycle as the PSU update, surviving path l takes over
// the row of its parent origin[l] and the node's message bits are written at
// base..base+2^s-1.  The message bits are obtained by re-encoding the node's
// partial sums with the polar transform (which is its own inverse).  'clear'
// zeroes all rows before a codeword, so skipped leading R0 nodes read as 0.
// 'rd_path' selects the row on the output; the CRC unit reads all rows.
module us_mem
  import srl_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned N_LOG = N_LOG_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 update,
  input  logic [3:0]           s,
  input  logic [10:0]          base,
  input  logic [$clog2(L)-1:0] origin [L],
  input  logic [NS_MAX-1:0]    beta   [L],
  output logic [(1<<N_LOG)-1:0] rows  [L]
);
  localparam int unsigned N = 1 << N_LOG;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(L); l++) rows[l] <= '0;
    end else if (clear) begin
      for (int l = 0; l < int'(L); l++) rows[l] <= '0;
    end else if (update) begin
      for (int l = 0; l < int'(L); l++) begin
        logic [N-1:0]      r;
        logic [NS_MAX-1:0] u;
        r = rows[origin[l]];
        u = polar_transform(beta[l], int'(s));
        for (int j = 0; j < int'(NS_MAX); j++)
          if (j < (1 << s) && int'(base) + j < int'(N)) r[int'(base) + j] = u[j];
        rows[l] <= r;
      end
    end
  end
endmodule
