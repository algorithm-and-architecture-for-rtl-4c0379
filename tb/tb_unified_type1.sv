// tb_unified_type1: random and corner tests of the Type-I block in both modes.
// SC mode must give f(a,b) = sign(a)sign(b)min(|a|,|b|) whatever the BP
// operands are; BP mode must give s sign(in1)sign(in2+in3)min(|in1|,|in2+in3|)
// with s = 15/16, the sum saturated to +/-63.
module tb_unified_type1;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  pe_mode_e mode;
  llr_t a, b, in1, in2, in3, d;
  int va, vb, v1, v2, v3, exp_v;
  unified_type1 dut (.mode, .a, .b, .in1_bp(in1), .in2_bp(in2), .in3_bp(in3), .d);
  initial begin
    for (int n = 0; n < 4000; n++) begin
      va = int'($urandom_range(126)) - 63;
      vb = int'($urandom_range(126)) - 63;
      v1 = int'($urandom_range(126)) - 63;
      v2 = int'($urandom_range(126)) - 63;
      v3 = int'($urandom_range(126)) - 63;
      if (n < 4) begin va = 63; vb = -63; v1 = 63; v2 = 63; v3 = 63; end
      a = to_llr(va); b = to_llr(vb);
      in1 = to_llr(v1); in2 = to_llr(v2); in3 = to_llr(v3);
      mode = MODE_SC;
      #1;
      exp_v = ref_f(va, vb);
      check(from_llr(d) == exp_v, $sformatf("SC f(%0d,%0d)=%0d exp %0d", va, vb, from_llr(d), exp_v));
      mode = MODE_BP;
      #1;
      exp_v = ref_t1_bp(v1, v2, v3);
      check(from_llr(d) == exp_v, $sformatf("BP t1(%0d,%0d,%0d)=%0d exp %0d", v1, v2, v3, from_llr(d), exp_v));
    end
    finish_tb();
  end
endmodule
