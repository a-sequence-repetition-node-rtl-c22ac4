// srl_decoder -- SR-List polar decoder, top level.
//
// Successive-cancellation list decoder for 5G NR polar codes (mother code
// length up to 2^N_LOG, list size L) that decodes sequence-repetition (SR)
// nodes, R0, REP, R1, SPC and TYPE-III nodes directly instead of walking the
// whole decoding tree.  The decoding schedule comes as a list of instructions
// (computed offline from the code's frozen set):
//   OP_SCU   the two-stage SC unit computes the LLRs of a child (one stage) or
//            grandchild (two stages) for all L paths, NPE first-stage PEs per
//            path, reading the channel LLR memory at the root and the
//            pointer-addressed internal LLR memory below it;
//   OP_NODE  the node processing unit list-decodes the node (RSU for the R0/REP
//            part of SR nodes, BNU for the G-PC/R0/REP part), then in one cycle
//            the PSUM unit combines partial sums up the tree and copies them for
//            the surviving paths, the Us memory stores the re-encoded message
//            bits, the pointer memory copies LLR pointers and the PM memory is
//            written;
//   OP_END   the CRC unit checks all L paths and the best passing path's message
//            bits are output on u_out with dec_valid.
// Interface: the host writes NPE channel LLRs per cycle (llr_wr_*), pushes
// instructions (instr_*), and pulses 'start' with the root stage n_root and the
// information-bit mask of the code.  Timing: every SCU chunk takes one cycle,
// every node its NPU latency plus one cycle, the CRC 2^N_LOG/64 + 1 cycles.
module srl_decoder
  import srl_pkg::*;
#(
  parameter int unsigned L      = L_DEF,
  parameter int unsigned N_LOG  = N_LOG_DEF,
  parameter int unsigned T_R1   = T_R1_DEF,
  parameter int unsigned T_SPC  = T_SPC_DEF,
  parameter int unsigned T_T3   = T_T3_DEF,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned CRC_W  = 24,
  parameter logic [CRC_W-1:0] CRC_POLY = 24'hB2B117
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // channel LLRs
  input  logic                  llr_wr_en,
  input  logic [N_LOG-1:0]      llr_wr_blk,
  input  llr_t                  llr_wr_data [NPE],
  // instructions
  input  logic                  instr_valid,
  output logic                  instr_ready,
  input  instr_t                instr_data,
  // codeword control
  input  logic                  start,
  input  logic [3:0]            n_root,
  input  logic [(1<<N_LOG)-1:0] info_mask,
  output logic                  busy,
  output logic                  stall,
  output logic                  chan_free,
  output logic                  dec_valid,
  output logic                  crc_ok,
  output logic [(1<<N_LOG)-1:0] u_out
);
  localparam int LW = $clog2(L);

  // controller
  logic       head_valid, pop, scu_en, npu_start, npu_done, upd, init;
  logic       crc_start, crc_done;
  instr_t     head, cur;
  logic [3:0] rd_s;
  logic [1:0] rd_nst;
  logic [4:0] rd_c;

  instr_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push_valid(instr_valid), .push_ready(instr_ready),
    .push_data(instr_data), .head_valid(head_valid), .head(head), .pop(pop));

  controller u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .n_root(n_root),
    .head_valid(head_valid), .head(head), .pop(pop),
    .scu_en(scu_en), .rd_s(rd_s), .rd_nst(rd_nst), .rd_c(rd_c),
    .npu_start(npu_start), .npu_done(npu_done), .upd(upd), .cur(cur),
    .init(init), .crc_start(crc_start), .crc_done(crc_done),
    .busy(busy), .stall(stall), .chan_free(chan_free), .dec_valid(dec_valid));

  // memories and SCU
  llr_t          ch_a [NPE], ch_b [NPE], ch_node [NS_MAX];
  llr_t          in_a [L][NPE], in_b [L][NPE], in_node [L][NS_MAX];
  llr_t          sa [L][NPE], sb [L][NPE];
  llr_t          y1 [L][NPE], y2 [L][NPE/2];
  logic          z1 [L][NPE], z2 [L][NPE/2];
  logic [LW-1:0] bank [L];
  llr_t          node_llr [L][NS_MAX];
  logic          at_root;

  assign at_root = (rd_s == n_root);

  channel_llr_mem #(.N_LOG(N_LOG)) u_chmem (
    .clk(clk), .wr_en(llr_wr_en), .wr_blk(llr_wr_blk), .wr_data(llr_wr_data),
    .rd_s(rd_s), .rd_nst(rd_nst), .rd_c(rd_c), .rd_a(ch_a), .rd_b(ch_b), .node_llr(ch_node));

  internal_llr_mem #(.L(L), .N_LOG(N_LOG)) u_imem (
    .clk(clk), .wr_en(scu_en), .wr_t(rd_s - {2'b00, rd_nst}), .wr_nst(rd_nst), .wr_c(rd_c),
    .wr_y1(y1), .wr_y2(y2), .rd_bank(bank), .rd_s(rd_s), .rd_nst(rd_nst), .rd_c(rd_c),
    .rd_a(in_a), .rd_b(in_b), .node_llr(in_node));

  always_comb
    for (int l = 0; l < int'(L); l++) begin
      for (int q = 0; q < int'(NPE); q++) begin
        sa[l][q] = at_root ? ch_a[q] : in_a[l][q];
        sb[l][q] = at_root ? ch_b[q] : in_b[l][q];
      end
      for (int j = 0; j < int'(NS_MAX); j++)
        node_llr[l][j] = at_root ? ch_node[j] : in_node[l][j];
    end

  scu #(.L(L)) u_scu (
    .a(sa), .b(sb), .z1(z1), .z2(z2), .op1(head.fg[0]), .op2(head.fg[1]), .y1(y1), .y2(y2));

  // NPU
  logic [LW-1:0]     org  [L];
  logic [NS_MAX-1:0] beta [L];
  pm_t               npm  [L], pm [L];
  logic              nval [L], pval [L];
  logic              npu_busy;

  npu #(.L(L), .T_R1(T_R1), .T_SPC(T_SPC), .T_T3(T_T3)) u_npu (
    .clk(clk), .rst_n(rst_n), .start(npu_start), .ntype(head.ntype), .s(head.stage),
    .sd(head.sd), .v(head.v), .np(head.np), .llr_in(node_llr), .pm_in(pm), .val_in(pval),
    .busy(npu_busy), .done(npu_done), .out_org(org), .out_beta(beta), .out_pm(npm), .out_val(nval));

  pm_mem #(.L(L)) u_pm (
    .clk(clk), .rst_n(rst_n), .init(init), .wr_en(upd), .wr_pm(npm), .wr_valid(nval),
    .pm(pm), .valid(pval));

  pointer_mem #(.L(L), .N_LOG(N_LOG)) u_ptr (
    .clk(clk), .rst_n(rst_n), .init(init), .scu_wr(scu_en), .scu_wr_t(rd_s - {2'b00, rd_nst}),
    .sel_en(upd), .origin(org), .rd_t(rd_s), .rd_bank(bank));

  psu #(.L(L), .N_LOG(N_LOG)) u_psu (
    .clk(clk), .rst_n(rst_n), .clear(init), .update(upd), .s(cur.stage), .base(cur.base),
    .origin(org), .beta(beta), .rd_s(rd_s), .rd_nst(rd_nst), .rd_c(rd_c), .z1(z1), .z2(z2));

  logic [(1<<N_LOG)-1:0] rows [L];

  us_mem #(.L(L), .N_LOG(N_LOG)) u_us (
    .clk(clk), .rst_n(rst_n), .clear(init), .update(upd), .s(cur.stage), .base(cur.base),
    .origin(org), .beta(beta), .rows(rows));

  // CRC and output
  logic [LW-1:0] sel;

  crc_unit #(.L(L), .N_LOG(N_LOG), .CRC_W(CRC_W), .POLY(CRC_POLY)) u_crc (
    .clk(clk), .rst_n(rst_n), .start(crc_start), .info_mask(info_mask), .rows(rows),
    .pm(pm), .valid(pval), .done(crc_done), .sel(sel), .crc_ok(crc_ok));

  assign u_out = rows[sel];
endmodule
