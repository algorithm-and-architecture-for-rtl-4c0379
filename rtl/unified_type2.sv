// unified_type2: the unified Type-II computation block.
//
// One block computes either the SC g-function
//     g(a,b) = (-1)^u_sum a + b                                (mode = MODE_SC)
// or the BP variable-node style update
//     d = in1 + s sign(in2) sign(in3) min(|in2|,|in3|)          (mode = MODE_BP)
// The SC case is the BP case with in1 = (-1)^u_sum a, in2 = in3 = b and the
// sign product replaced by sign(b): sign(b) sign(b) sign(b) min(|b|,|b|) = b.
// Datapath: three input muxes (select 0 = SC operands, 1 = BP operands), the
// XOR of sign(in2) and sign(in3), a second XOR with sign(b) chosen by a mux in
// SC mode, Comp & Select of |in2| and |in3|, the Scale unit, S2C of the scaled
// term and of in1, one adder and a C2S with saturation.
// This follows the published Type-II block. The published drawing shows no
// bypass around the scale unit; here the scale unit is bypassed in SC mode
// (as in the Type-I block), since g must add b unscaled. (-1)^u_sum a is formed
// by flipping the sign bit of a. Purely combinational.
module unified_type2
  import polar_pkg::*;
(
  input  pe_mode_e mode,
  input  llr_t     a,        // SC operands
  input  llr_t     b,
  input  logic     u_sum,    // SC partial sum
  input  llr_t     in1_bp,   // BP operands
  input  llr_t     in2_bp,
  input  llr_t     in3_bp,
  output llr_t     d
);
  llr_t in1, in2, in3, a_flip, term;
  logic x23, s_min;
  logic [MAGW-1:0] mn, mn_scaled;
  tc_t  term_tc, in1_tc, sum_tc;

  assign a_flip = '{sgn: a.sgn ^ u_sum, mag: a.mag};
  assign in1 = (mode == MODE_BP) ? in1_bp : a_flip;
  assign in2 = (mode == MODE_BP) ? in2_bp : b;
  assign in3 = (mode == MODE_BP) ? in3_bp : b;

  assign x23   = in2.sgn ^ in3.sgn;
  assign s_min = (mode == MODE_BP) ? x23 : (x23 ^ b.sgn);

  comp_select u_cs (.a(in2.mag), .b(in3.mag), .min_o(mn));
  scale_unit  u_sc (.mag_i(mn), .mag_o(mn_scaled));

  assign term = '{sgn: s_min, mag: (mode == MODE_BP) ? mn_scaled : mn};

  s2c u_s2c_t (.x(term), .y(term_tc));
  s2c u_s2c_1 (.x(in1),  .y(in1_tc));
  assign sum_tc = term_tc + in1_tc;
  c2s u_c2s (.y(sum_tc), .x(d));
endmodule
