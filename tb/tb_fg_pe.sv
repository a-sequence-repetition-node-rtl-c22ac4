// tb_fg_pe -- exhaustive test of the f/g processing element.
// Every pair of 6-bit LLRs in the saturated range -31..31, both partial-sum
// values and both functions are applied; the result is compared with
// f(a,b) = sign(a) sign(b) min(|a|,|b|) and g(a,b,z) = b + (1-2z) a saturated
// to +/-31, computed here with plain integers.
module tb_fg_pe;
  import srl_pkg::*;
  llr_t a, b, y;
  logic z, sel_g;
  int checks = 0, failures = 0;

  fg_pe dut (.a(a), .b(b), .z(z), .sel_g(sel_g), .y(y));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ia = -31; ia <= 31; ia++)
      for (int ib = -31; ib <= 31; ib++)
        for (int m = 0; m < 4; m++) begin
          int ref_v, ma, mb;
          a = llr_t'(ia); b = llr_t'(ib); z = m[0]; sel_g = m[1];
          #1;
          if (!sel_g) begin
            ma = (ia < 0) ? -ia : ia;
            mb = (ib < 0) ? -ib : ib;
            ref_v = (ma < mb) ? ma : mb;
            if ((ia < 0) != (ib < 0)) ref_v = -ref_v;
          end else begin
            ref_v = z ? ib - ia : ib + ia;
            if (ref_v > 31) ref_v = 31;
            if (ref_v < -31) ref_v = -31;
          end
          checks++;
          if (int'(y) != ref_v) begin
            failures++;
            if (failures < 10) $display("a=%0d b=%0d z=%0d g=%0d: y=%0d expected %0d", ia, ib, z, sel_g, y, ref_v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
