// tb_crc_unit -- test of the final CRC check and path selection (4 paths,
// N = 128, CRC-24C).  Each trial builds random message rows; a random subset
// of paths gets a correct CRC appended on the information positions (message
// first, CRC last, most significant bit first), the others a corrupted one.
// The unit must report 'done' exactly 2^7/64 + 1 cycles after 'start',
// crc_ok when some valid path passes, and select the passing valid path of
// smallest metric (or the valid path of smallest metric if none passes).
// Metrics are distinct, so the expected choice is unique.
module tb_crc_unit;
  import srl_pkg::*;
  localparam int L = 4, NL = 7, N = 1 << NL;
  logic clk = 0, rst_n = 0, start = 0, done, crc_ok;
  logic [N-1:0] info_mask, rows [L];
  pm_t  pm [L];
  logic valid [L];
  logic [1:0] sel;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  crc_unit #(.L(L), .N_LOG(NL)) dut (.clk(clk), .rst_n(rst_n), .start(start), .info_mask(info_mask),
    .rows(rows), .pm(pm), .valid(valid), .done(done), .sel(sel), .crc_ok(crc_ok));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) begin rows[l] = '0; pm[l] = '0; valid[l] = 0; end
    info_mask = '0;
    #12 rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      int k, pos [$], cyc, best, bestp;
      bit pass [L];
      k = 30 + $urandom % 60;
      info_mask = '0;
      pos.delete();
      while (pos.size() < k) begin
        int p;
        p = $urandom % N;
        if (!info_mask[p]) info_mask[p] = 1;
        if (pos.size() < k && info_mask[p] && !(p inside {pos})) pos.push_back(p);
      end
      pos.sort();
      for (int l = 0; l < L; l++) begin
        logic [23:0] c;
        rows[l] = {$urandom, $urandom, $urandom, $urandom};
        c = '0;
        for (int i = 0; i < k - 24; i++) begin
          logic fb;
          fb = c[23] ^ rows[l][pos[i]];
          c  = {c[22:0], 1'b0} ^ (fb ? 24'hB2B117 : 24'h0);
        end
        pass[l] = ($urandom % 2) == 0;
        if (!pass[l]) begin
          int e;
          e = $urandom % 24;
          c[e] = ~c[e];
        end
        for (int i = 0; i < 24; i++) rows[l][pos[k - 24 + i]] = c[23 - i];
        pm[l]    = pm_t'(l * 17 + 3 * ($urandom % 5));
        valid[l] = ($urandom % 5) != 0;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 50) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != N / 64 + 1) begin failures++; $display("latency %0d", cyc); end
      best = -1; bestp = 0;
      for (int l = 0; l < L; l++) if (valid[l] && pass[l] && (best < 0 || pm[l] < pm[best])) best = l;
      bestp = (best >= 0);
      if (best < 0)
        for (int l = 0; l < L; l++) if (valid[l] && (best < 0 || pm[l] < pm[best])) best = l;
      checks++;
      if (crc_ok != bestp) begin failures++; $display("crc_ok=%0d exp=%0d pass=%p valid=%p", crc_ok, bestp, pass, valid); end
      if (best >= 0) begin
        checks++;
        if (int'(sel) != best) begin failures++; $display("sel=%0d exp=%0d pm=%p pass=%p valid=%p", sel, best, pm, pass, valid); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
