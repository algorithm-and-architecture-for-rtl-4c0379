// tb_unified_pe: random test of one butterfly PE. BP mode: the four min-sum BP
// messages of the butterfly; SC mode: f and g on the L side.
module tb_unified_pe;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  pe_mode_e mode;
  llr_t lu, ll, ru, rl, olu, oll, oru, orl;
  logic ps;
  int vlu, vll, vru, vrl;
  unified_pe dut (.mode, .l_in_up(lu), .l_in_lo(ll), .r_in_up(ru), .r_in_lo(rl), .ps_up(ps),
                  .l_out_up(olu), .l_out_lo(oll), .r_out_up(oru), .r_out_lo(orl));
  initial begin
    for (int n = 0; n < 3000; n++) begin
      vlu = int'($urandom_range(126)) - 63;
      vll = int'($urandom_range(126)) - 63;
      vru = int'($urandom_range(126)) - 63;
      vrl = int'($urandom_range(126)) - 63;
      ps  = $urandom_range(1);
      lu = to_llr(vlu); ll = to_llr(vll); ru = to_llr(vru); rl = to_llr(vrl);
      mode = MODE_BP;
      #1;
      check(from_llr(olu) == ref_t1_bp(vlu, vll, vrl), "BP L upper");
      check(from_llr(oll) == ref_t2_bp(vll, vru, vlu), "BP L lower");
      check(from_llr(oru) == ref_t1_bp(vru, vll, vrl), "BP R upper");
      check(from_llr(orl) == ref_t2_bp(vrl, vru, vlu), "BP R lower");
      mode = MODE_SC;
      #1;
      check(from_llr(olu) == ref_f(vlu, vll), "SC f");
      check(from_llr(oll) == ref_g(vlu, vll, ps), "SC g");
    end
    finish_tb();
  end
endmodule
