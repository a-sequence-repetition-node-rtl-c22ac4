// tb_pointer_mem -- random test of the LLR bank pointer memory against a
// table model: an SCU write of stage t points every path at its own bank for
// t; a path selection gives every path the pointers of its origin; 'init'
// points every path at its own banks.  Reads are checked at random stages.
module tb_pointer_mem;
  import srl_pkg::*;
  localparam int L = 4, NL = 9, LW = 2;
  logic clk = 0, rst_n = 0, init = 0, scu_wr = 0, sel_en = 0;
  logic [3:0] scu_wr_t = 0, rd_t = 0;
  logic [LW-1:0] origin [L], rd_bank [L];
  int model [L][NL];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pointer_mem #(.L(L), .N_LOG(NL)) dut (.clk(clk), .rst_n(rst_n), .init(init), .scu_wr(scu_wr),
    .scu_wr_t(scu_wr_t), .sel_en(sel_en), .origin(origin), .rd_t(rd_t), .rd_bank(rd_bank));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) begin
      origin[l] = '0;
      for (int t = 0; t < NL; t++) model[l][t] = l;
    end
    #12 rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      int m;
      int nm [L][NL];
      @(negedge clk);
      m = $urandom % 8;
      init   = (m == 0);
      sel_en = (m >= 1 && m <= 3);
      scu_wr = (m >= 4 && m <= 6);
      scu_wr_t = 4'($urandom % NL);
      for (int l = 0; l < L; l++) origin[l] = LW'($urandom);
      nm = model;
      if (init) begin
        for (int l = 0; l < L; l++) for (int t = 0; t < NL; t++) nm[l][t] = l;
      end else if (sel_en) begin
        for (int l = 0; l < L; l++) for (int t = 0; t < NL; t++) nm[l][t] = model[origin[l]][t];
      end else if (scu_wr) begin
        for (int l = 0; l < L; l++) nm[l][scu_wr_t] = l;
      end
      @(posedge clk);
      model = nm;
      #1;
      init = 0; sel_en = 0; scu_wr = 0;
      for (int k = 0; k < 3; k++) begin
        rd_t = 4'($urandom % NL);
        #1;
        for (int l = 0; l < L; l++) begin
          checks++;
          if (int'(rd_bank[l]) != model[l][rd_t]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
