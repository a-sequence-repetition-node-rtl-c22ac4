// npu -- node processing unit: RSU + BNU and the NPU sub-controller.
//
// Decodes one node given the LLR vectors of all L paths at its stage, their
// path metrics and validity.  The sub-controller routes a node with s > r (an
// SR node) through the repetition sequence unit: cycle 1 is the RSU's sequence
// extension unit, cycle 2 its sequence sorter unit, whose L surviving
// candidates are loaded into the basic node unit at the end of that cycle for
// the SR-II part.  Any other node (R0, REP, R1, SPC, TYPE-III with s = r)
// skips the RSU and starts the BNU directly.  'done' is high for one cycle
// when the outputs are valid (see bnu for the per-type latency).  The
// instruction fields must stay stable only in the 'start' cycle.
module npu
  import srl_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned T_R1  = T_R1_DEF,
  parameter int unsigned T_SPC = T_SPC_DEF,
  parameter int unsigned T_T3  = T_T3_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  node_e                ntype,
  input  logic [3:0]           s,
  input  logic [1:0]           sd,
  input  logic [1:0]           v,
  input  logic [1:0]           np,
  input  llr_t                 llr_in [L][NS_MAX],
  input  pm_t                  pm_in  [L],
  input  logic                 val_in [L],
  output logic                 busy,
  output logic                 done,
  output logic [$clog2(L)-1:0] out_org  [L],
  output logic [NS_MAX-1:0]    out_beta [L],
  output pm_t                  out_pm   [L],
  output logic                 out_val  [L]
);
  logic                 sr_start, sr_load;
  logic [3:0]           r_s;
  logic [1:0]           r_sd, r_np;
  logic [$clog2(L)-1:0] sv_par [L];
  logic [LOG_S_MAX-1:0] sv_k   [L];
  pm_t                  sv_pm  [L];
  logic                 sv_val [L];
  sllr_t                sv_llr [L][NS_MAX/2];
  logic                 sv_gam [L][2];
  logic [3:0]           sv_eps [L][2];
  logic [SLLR_W-1:0]    sv_mag [L][2];
  logic                 bnu_busy;

  assign sr_start = start && (ntype == NT_SR);

  // sub-controller: the SSU cycle follows the SEU cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_load <= 1'b0;
      r_s     <= '0;
      r_sd    <= '0;
      r_np    <= '0;
    end else begin
      sr_load <= sr_start;
      if (sr_start) begin
        r_s  <= s;
        r_sd <= sd;
        r_np <= np;
      end
    end
  end

  rsu #(.L(L)) u_rsu (
    .clk(clk), .start(sr_start), .s(s), .sd(sd), .v(v), .np(np),
    .llr_in(llr_in), .pm_in(pm_in), .val_in(val_in),
    .sv_par(sv_par), .sv_k(sv_k), .sv_pm(sv_pm), .sv_val(sv_val),
    .sv_llr(sv_llr), .sv_gam(sv_gam), .sv_eps(sv_eps), .sv_mag(sv_mag));

  bnu #(.L(L), .T_R1(T_R1), .T_SPC(T_SPC), .T_T3(T_T3)) u_bnu (
    .clk(clk), .rst_n(rst_n),
    .start(start && ntype != NT_SR), .ntype(ntype), .s(sr_load ? r_s : s),
    .llr_in(llr_in), .pm_in(pm_in), .val_in(val_in),
    .load_sr(sr_load), .sr_sd(r_sd), .sr_np(r_np),
    .sv_par(sv_par), .sv_k(sv_k), .sv_pm(sv_pm), .sv_val(sv_val),
    .sv_llr(sv_llr), .sv_gam(sv_gam), .sv_eps(sv_eps), .sv_mag(sv_mag),
    .busy(bnu_busy), .done(done),
    .out_org(out_org), .out_beta(out_beta), .out_pm(out_pm), .out_val(out_val));

  assign busy = bnu_busy || sr_load;

  // a new node may only start while the unit is idle
  assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
