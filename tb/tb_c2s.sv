// tb_c2s: exhaustive test of the two's-complement to sign-magnitude converter,
// including saturation of out-of-range sums.
module tb_c2s;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  llr_t x;
  tc_t  y;
  c2s dut (.y, .x);
  initial begin
    for (int v = -128; v < 128; v++) begin
      y = tc_t'(v);
      #1;
      check(from_llr(x) == sat(v) && (v != 0 || x.sgn == 1'b0),
            $sformatf("c2s %0d -> sgn=%0d mag=%0d", v, x.sgn, x.mag));
    end
    finish_tb();
  end
endmodule
