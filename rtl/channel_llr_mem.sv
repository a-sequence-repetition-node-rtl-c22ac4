// channel_llr_mem -- channel LLR memory with SCU operand routing.
//
// Holds the 2^N_LOG channel LLRs of one codeword (after rate recovery).  The
// host writes NPE LLRs per clock cycle at block address 'wr_blk'.  Two
// combinational read views are offered: the SCU view, which gathers the a/b
// operands of all first-stage SCU lanes for a step from stage 'rd_s' (the root)
// with 'rd_nst' stages in chunk 'rd_c', and the node view, which returns the
// first NS_MAX LLRs for the (rare) case that the root itself is decoded by the
// node processing unit.  A new codeword may be written once the decoder has
// applied the g-function at the root (see the controller's chan_free).
// The memory is written as a register array; the paper gives its function and
// word width only, the write width is this design's choice.
module channel_llr_mem
  import srl_pkg::*;
#(
  parameter int unsigned N_LOG = N_LOG_DEF
) (
  input  logic                  clk,
  input  logic                  wr_en,
  input  logic [N_LOG-1:0]      wr_blk,
  input  llr_t                  wr_data [NPE],
  input  logic [3:0]            rd_s,
  input  logic [1:0]            rd_nst,
  input  logic [4:0]            rd_c,
  output llr_t                  rd_a [NPE],
  output llr_t                  rd_b [NPE],
  output llr_t                  node_llr [NS_MAX]
);
  localparam int unsigned N = 1 << N_LOG;

  llr_t mem [N];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int q = 0; q < int'(NPE); q++)
        if (int'(wr_blk) * int'(NPE) + q < int'(N))
          mem[int'(wr_blk) * int'(NPE) + q] <= wr_data[q];
  end

  always_comb begin
    for (int q = 0; q < int'(NPE); q++) begin
      int aa, ab;
      aa = scu_rd_addr(int'(rd_s), int'(rd_nst), int'(rd_c), q, 1'b0);
      ab = scu_rd_addr(int'(rd_s), int'(rd_nst), int'(rd_c), q, 1'b1);
      rd_a[q] = (aa < int'(N)) ? mem[aa] : '0;
      rd_b[q] = (ab < int'(N)) ? mem[ab] : '0;
    end
    for (int j = 0; j < int'(NS_MAX); j++) node_llr[j] = mem[j];
  end
endmodule
