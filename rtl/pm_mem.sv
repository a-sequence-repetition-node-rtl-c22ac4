// pm_mem -- path metric memory.
//
// Holds one path metric and one valid flag per list entry.  'init' (start of a
// codeword) leaves a single valid path, entry 0, with metric 0; the others are
// marked unused.  After every node the NPU's new list (already re-ordered to
// the surviving paths) is written with 'wr_en'.  The paper names the memory;
// the separate valid flag is this design's choice.
module pm_mem
  import srl_pkg::*;
#(
  parameter int unsigned L = L_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic init,
  input  logic wr_en,
  input  pm_t  wr_pm    [L],
  input  logic wr_valid [L],
  output pm_t  pm       [L],
  output logic valid    [L]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(L); l++) begin
        pm[l]    <= '0;
        valid[l] <= (l == 0);
      end
    end else if (init) begin
      for (int l = 0; l < int'(L); l++) begin
        pm[l]    <= '0;
        valid[l] <= (l == 0);
      end
    end else if (wr_en) begin
      pm    <= wr_pm;
      valid <= wr_valid;
    end
  end
endmodule
