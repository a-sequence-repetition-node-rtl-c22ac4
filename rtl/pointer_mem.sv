// pointer_mem -- physical location of every path's internal LLRs.
//
// ptr[l][t] names the internal LLR bank that holds path l's LLR vector of stage
// t.  When the SCU writes stage t (all paths in lock step, path l into its own
// bank) ptr[l][t] becomes l.  When the list is updated after a node, surviving
// path l inherits all pointers of its parent origin[l], which replaces copying
// the LLR vectors themselves (lazy copy).  Reset and 'init' (start of a
// codeword) make every path point to its own bank.  The read port returns the
// bank of every path at stage rd_t.  The paper names the pointer memory and its
// purpose; the organisation is the usual one for LLR-based SCL decoders.
module pointer_mem
  import srl_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned N_LOG = N_LOG_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init,
  input  logic                 scu_wr,
  input  logic [3:0]           scu_wr_t,
  input  logic                 sel_en,
  input  logic [$clog2(L)-1:0] origin [L],
  input  logic [3:0]           rd_t,
  output logic [$clog2(L)-1:0] rd_bank [L]
);
  localparam int LW = $clog2(L);
  logic [LW-1:0] ptr [L][N_LOG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(L); l++)
        for (int t = 0; t < int'(N_LOG); t++) ptr[l][t] <= LW'(l);
    end else if (init) begin
      for (int l = 0; l < int'(L); l++)
        for (int t = 0; t < int'(N_LOG); t++) ptr[l][t] <= LW'(l);
    end else if (sel_en) begin
      for (int l = 0; l < int'(L); l++)
        for (int t = 0; t < int'(N_LOG); t++) ptr[l][t] <= ptr[origin[l]][t];
    end else if (scu_wr) begin
      for (int l = 0; l < int'(L); l++)
        if (int'(scu_wr_t) < int'(N_LOG)) ptr[l][scu_wr_t] <= LW'(l);
    end
  end

  always_comb
    for (int l = 0; l < int'(L); l++)
      rd_bank[l] = (int'(rd_t) < int'(N_LOG)) ? ptr[l][rd_t] : LW'(l);
endmodule
