// internal_llr_mem -- L banks of internal LLRs with pointer-based reads.
//
// Bank p holds, for every stored stage t, one vector of 2^t LLRs: all stages up
// to LOG_NS_MAX (nodes can be decoded there) and, above them, only every
// SCU_STAGES-th stage counted down from stage N_LOG (the stages in between are
// recomputed combinationally in the SCU).  With the defaults this is stage 7
// and stages 0..5, 191 LLRs per bank instead of 511.
//
// All L paths are processed in lock step: an SCU step writes, for every path
// l, its result into bank l at stage 'wr_t'.  Reads of path l at stage t go to
// bank ptr[l][t] (pointer memory), so that after path forking no LLR vector
// needs to be copied.  Reads are combinational, writes take effect at the
// clock edge.  The two-part (pruned upper / full lower) organisation follows
// the paper; the exact layout is this design's choice.
module internal_llr_mem
  import srl_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned N_LOG = N_LOG_DEF
) (
  input  logic               clk,
  // SCU result write, all paths at once
  input  logic               wr_en,
  input  logic [3:0]         wr_t,
  input  logic [1:0]         wr_nst,
  input  logic [4:0]         wr_c,
  input  llr_t               wr_y1 [L][NPE],
  input  llr_t               wr_y2 [L][NPE/2],
  // bank pointers of every path for the stage being read
  input  logic [$clog2(L)-1:0] rd_bank [L],
  // SCU operand view
  input  logic [3:0]         rd_s,
  input  logic [1:0]         rd_nst,
  input  logic [4:0]         rd_c,
  output llr_t               rd_a [L][NPE],
  output llr_t               rd_b [L][NPE],
  // node view: the vector at stage rd_s, first NS_MAX entries
  output llr_t               node_llr [L][NS_MAX]
);
  localparam int DEPTH = stage_off(int'(N_LOG), int'(N_LOG));

  llr_t mem [L][DEPTH];

  int wr_off, rd_off;
  assign wr_off = stage_off(int'(wr_t), int'(N_LOG));
  assign rd_off = stage_off(int'(rd_s), int'(N_LOG));

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < int'(L); l++)
        for (int q = 0; q < int'(NPE); q++) begin
          int d;
          d = scu_wr_addr(int'(wr_nst), int'(wr_c), q);
          if ((wr_nst == 2'd1 || q < int'(NPE / 2)) && d < (1 << wr_t) &&
              wr_off + d < DEPTH)
            mem[l][wr_off + d] <=
              (wr_nst == 2'd1) ? wr_y1[l][q] : wr_y2[l][q % int'(NPE / 2)];
        end
    end
  end

  always_comb begin
    int base, aa, ab;
    base = rd_off;
    for (int l = 0; l < int'(L); l++) begin
      for (int q = 0; q < int'(NPE); q++) begin
        aa = base + scu_rd_addr(int'(rd_s), int'(rd_nst), int'(rd_c), q, 1'b0);
        ab = base + scu_rd_addr(int'(rd_s), int'(rd_nst), int'(rd_c), q, 1'b1);
        rd_a[l][q] = (aa < DEPTH) ? mem[rd_bank[l]][aa] : '0;
        rd_b[l][q] = (ab < DEPTH) ? mem[rd_bank[l]][ab] : '0;
      end
      for (int j = 0; j < int'(NS_MAX); j++)
        node_llr[l][j] = (base + j < DEPTH) ? mem[rd_bank[l]][base + j] : '0;
    end
  end
endmodule
