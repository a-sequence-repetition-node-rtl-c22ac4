// crc_unit -- CRC check of the final list and selection of the output path.
//
// After the last node, the message-bit rows of all L paths are checked in
// parallel.  The information bits (positions set in 'info_mask', in index
// order: message followed by the attached CRC) are fed, W positions per clock
// cycle, through a CRC_W-bit LFSR with generator POLY (zero initial value); a
// path passes if the remainder is zero.  The unit then picks the valid path
// with the smallest metric among those that pass, or the smallest-metric path
// if none passes, and reports it with 'done' for one cycle.
// Latency: 2^N_LOG / W cycles plus one.  The paper only names the CRC unit; the
// generator defaults to 3GPP CRC-24C (downlink), and neither the downlink CRC
// interleaver nor RNTI scrambling is modelled.
module crc_unit
  import srl_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned N_LOG = N_LOG_DEF,
  parameter int unsigned W     = 64,
  parameter int unsigned CRC_W = 24,
  parameter logic [CRC_W-1:0] POLY = 24'hB2B117
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [(1<<N_LOG)-1:0] info_mask,
  input  logic [(1<<N_LOG)-1:0] rows  [L],
  input  pm_t                   pm    [L],
  input  logic                  valid [L],
  output logic                  done,
  output logic [$clog2(L)-1:0]  sel,
  output logic                  crc_ok
);
  localparam int unsigned N  = 1 << N_LOG;
  localparam int unsigned NB = (N + W - 1) / W;
  localparam int          CW = $clog2(NB + 1);

  logic [CRC_W-1:0] crc [L];
  logic [CW-1:0]    blk;
  logic             run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      blk  <= '0;
      done <= 1'b0;
      for (int l = 0; l < int'(L); l++) crc[l] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        run <= 1'b1;
        blk <= '0;
        for (int l = 0; l < int'(L); l++) crc[l] <= '0;
      end else if (run) begin
        for (int l = 0; l < int'(L); l++) begin
          logic [CRC_W-1:0] c;
          c = crc[l];
          for (int q = 0; q < int'(W); q++) begin
            int i;
            i = int'(blk) * int'(W) + q;
            if (i < int'(N) && info_mask[i]) begin
              logic fb;
              fb = c[CRC_W-1] ^ rows[l][i];
              c  = {c[CRC_W-2:0], 1'b0} ^ (fb ? POLY : '0);
            end
          end
          crc[l] <= c;
        end
        if (int'(blk) == int'(NB) - 1) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
        blk <= blk + CW'(1);
      end
    end
  end

  always_comb begin
    logic found;
    pm_t  best;
    found  = 1'b0;
    best   = '1;
    sel    = '0;
    for (int l = 0; l < int'(L); l++)
      if (valid[l] && crc[l] == '0 && (!found || pm[l] < best)) begin
        found = 1'b1;
        best  = pm[l];
        sel   = ($clog2(L))'(l);
      end
    if (!found)
      for (int l = 0; l < int'(L); l++)
        if (valid[l] && (!found || pm[l] < best)) begin
          found = 1'b1;
          best  = pm[l];
          sel   = ($clog2(L))'(l);
        end
    crc_ok = 1'b0;
    for (int l = 0; l < int'(L); l++)
      if (valid[l] && crc[l] == '0) crc_ok = 1'b1;
  end
endmodule
