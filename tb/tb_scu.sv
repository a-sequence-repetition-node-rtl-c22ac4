// tb_scu -- random test of the two-stage SC unit (reduced to 2 paths and 8
// first-stage lanes).  First-stage lane q computes f or g of (a[q], b[q]) with
// partial sum z1[q]; second-stage lane q combines first-stage results q and
// q + PEN/2 with partial sum z2[q].  Expected values are computed here with
// integer arithmetic.
module tb_scu;
  import srl_pkg::*;
  localparam int L = 2, PEN = 8;
  llr_t a [L][PEN], b [L][PEN], y1 [L][PEN], y2 [L][PEN/2];
  logic z1 [L][PEN], z2 [L][PEN/2];
  logic op1, op2;
  int checks = 0, failures = 0;

  scu #(.L(L), .PEN(PEN)) dut (.a(a), .b(b), .z1(z1), .z2(z2), .op1(op1), .op2(op2),
                              .y1(y1), .y2(y2));

  function automatic int fg(input int x, input int y, input bit z, input bit g);
    int r, mx, my;
    if (!g) begin
      mx = (x < 0) ? -x : x;
      my = (y < 0) ? -y : y;
      r  = (mx < my) ? mx : my;
      return ((x < 0) != (y < 0)) ? -r : r;
    end
    r = z ? y - x : y + x;
    return (r > 31) ? 31 : (r < -31) ? -31 : r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int r1 [L][PEN];
      for (int l = 0; l < L; l++) begin
        for (int q = 0; q < PEN; q++) begin
          a[l][q]  = llr_t'(int'($urandom % 63) - 31);
          b[l][q]  = llr_t'(int'($urandom % 63) - 31);
          z1[l][q] = 1'($urandom);
        end
        for (int q = 0; q < PEN / 2; q++) z2[l][q] = 1'($urandom);
      end
      op1 = 1'($urandom);
      op2 = 1'($urandom);
      #1;
      for (int l = 0; l < L; l++) begin
        for (int q = 0; q < PEN; q++) begin
          r1[l][q] = fg(int'(a[l][q]), int'(b[l][q]), z1[l][q], op1);
          checks++;
          if (int'(y1[l][q]) != r1[l][q]) failures++;
        end
        for (int q = 0; q < PEN / 2; q++) begin
          checks++;
          if (int'(y2[l][q]) != fg(r1[l][q], r1[l][q + PEN/2], z2[l][q], op2)) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
