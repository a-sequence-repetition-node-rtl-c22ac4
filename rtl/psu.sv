// psu -- PSUM unit: partial-sum memory, combine operation and path copy.
//
// For every path the PSUM memory keeps, per stage t < N_LOG, the 2^t partial
// sums of the most recently decoded left child at that stage (stored at bit
// offset 2^t - 1).  These are the z inputs of the SCU's g-functions.
//
// update (one clock cycle, right after the NPU finishes a node of stage s whose
// first leaf is 'base'):  surviving path l first takes over the PSUM memory of
// its parent origin[l]; then its node output beta[l] is walked up the tree.
// At each stage t >= s, if the node containing the leaf is a left child the
// vector is stored at stage t and the walk stops; if it is a right child the
// combine operation (beta_L xor beta_R, beta_R) with the stored left sibling
// forms the parent's vector, one stage up.  All stages are combined within the
// same cycle, as described in the paper.
// clear: the whole memory is set to 0 before a codeword, which lets the
// decoder skip the R0 nodes in front of the first information bit.
// The SCU read view returns z1 (stage rd_s-1) and z2 (stage rd_s-2) for the
// lanes of the current SCU step.
module psu
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
  // SCU view
  input  logic [3:0]           rd_s,
  input  logic [1:0]           rd_nst,
  input  logic [4:0]           rd_c,
  output logic                 z1 [L][NPE],
  output logic                 z2 [L][NPE/2]
);
  localparam int unsigned N  = 1 << N_LOG;
  localparam int unsigned PW = N - 1;

  logic [PW-1:0] mem [L];
  logic [PW-1:0] nxt [L];

  // Walk of path l: stage by stage from s upwards, either store the vector at
  // stage t (left child, the walk ends) or combine it with the stored left
  // sibling (right child).  Shifts and masks keep the loop body free of
  // variable part-selects.
  for (genvar gl = 0; gl < int'(L); gl++) begin : g_path
    always_comb begin
      logic [N-1:0]  cur, m, left;
      logic [PW-1:0] acc;
      logic          dn;
      acc = mem[origin[gl]];
      cur = N'(beta[gl]);
      dn  = 1'b0;
      for (int t = 0; t < int'(N_LOG); t++) begin
        m    = (N'(1) << (1 << t)) - N'(1);
        left = N'(acc >> ((1 << t) - 1)) & m;
        if (!dn && t >= int'(s)) begin
          if (!base[t]) begin
            acc = (acc & ~(PW'(m) << ((1 << t) - 1))) | (PW'(cur & m) << ((1 << t) - 1));
            dn  = 1'b1;
          end else begin
            cur = ((cur & m) << (1 << t)) | ((cur ^ left) & m);
          end
        end
      end
      nxt[gl] = acc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(L); l++) mem[l] <= '0;
    end else if (clear) begin
      for (int l = 0; l < int'(L); l++) mem[l] <= '0;
    end else if (update) begin
      mem <= nxt;
    end
  end

  always_comb begin
    int i1, i2, s1, s2;
    s1 = (int'(rd_s) >= 1) ? (1 << (int'(rd_s) - 1)) - 1 : 0;
    s2 = (int'(rd_s) >= 2) ? (1 << (int'(rd_s) - 2)) - 1 : 0;
    for (int l = 0; l < int'(L); l++) begin
      for (int q = 0; q < int'(NPE); q++) begin
        i1 = s1 + scu_rd_addr(int'(rd_s), int'(rd_nst), int'(rd_c), q, 1'b0);
        z1[l][q] = (i1 < int'(PW)) ? mem[l][i1] : 1'b0;
      end
      for (int q = 0; q < int'(NPE / 2); q++) begin
        i2 = s2 + scu_wr_addr(2, int'(rd_c), q);
        z2[l][q] = (i2 < int'(PW)) ? mem[l][i2] : 1'b0;
      end
    end
  end
endmodule
