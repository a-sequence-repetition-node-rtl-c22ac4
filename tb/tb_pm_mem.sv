// tb_pm_mem -- test of the path-metric memory: after reset and after 'init'
// only path 0 is valid with metric 0; a write replaces all metrics and
// validity flags at the clock edge; without a write the contents hold.
module tb_pm_mem;
  import srl_pkg::*;
  localparam int L = 8;
  logic clk = 0, rst_n = 0, init = 0, wr_en = 0;
  pm_t  wr_pm [L], pm [L];
  logic wr_valid [L], valid [L];
  pm_t  e_pm [L];
  logic e_val [L];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pm_mem #(.L(L)) dut (.clk(clk), .rst_n(rst_n), .init(init), .wr_en(wr_en), .wr_pm(wr_pm),
                       .wr_valid(wr_valid), .pm(pm), .valid(valid));

  task automatic compare();
    for (int l = 0; l < L; l++) begin
      checks++;
      if (valid[l] != e_val[l] || (e_val[l] && pm[l] != e_pm[l])) failures++;
    end
  endtask

  task automatic expect_init();
    for (int l = 0; l < L; l++) begin e_pm[l] = '0; e_val[l] = (l == 0); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) begin wr_pm[l] = '0; wr_valid[l] = 0; end
    #12 rst_n = 1;
    expect_init();
    @(negedge clk); compare();
    for (int it = 0; it < 500; it++) begin
      int m;
      m = $urandom % 4;
      init  = (m == 0);
      wr_en = (m >= 2);
      for (int l = 0; l < L; l++) begin wr_pm[l] = pm_t'($urandom); wr_valid[l] = 1'($urandom); end
      @(negedge clk);
      if (m == 0) expect_init();
      else if (m >= 2) for (int l = 0; l < L; l++) begin e_pm[l] = wr_pm[l]; e_val[l] = wr_valid[l]; end
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
