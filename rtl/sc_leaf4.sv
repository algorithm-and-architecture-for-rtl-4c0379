// sc_leaf4: combinational decoder of a 4-bit SC sub-tree.
//
// The SC decoder works on 8-bit leaves (nodes of stage 3). A leaf is decoded in
// two cycles: in the first the stage-3 PEs compute the four f outputs and this
// unit decodes bits 0..3 of the leaf from them; in the second the stage-3 PEs
// compute the four g outputs (using the partial sums of bits 0..3) and this
// unit decodes bits 4..7. Inside, two levels of f/g nodes and the hard-decision
// (h) units are chained without registers, using the same unified Type-I/II
// blocks in SC mode:
//   a_k = f(l_k, l_{k+2}),                   k = 0,1
//   u0 = h(f(a0,a1)),   u1 = h(g(a0,a1,u0))
//   b_k = g(l_k, l_{k+2}, p_k),  p = (u0^u1, u1)
//   u2 = h(f(b0,b1)),   u3 = h(g(b0,b1,u2))
// h gives 0 for a frozen bit and the sign of the LLR otherwise. enc is the
// 4-bit partial-sum vector u * G4 of the decoded bits.
// Decoding a leaf in two cycles reproduces the published latency of an 8-bit
// output SC decoder (N/2 - 2 cycles); the split into two 4-bit halves is this
// design's reading of it.
module sc_leaf4
  import polar_pkg::*;
(
  input  llr_t       llr [4],
  input  logic [3:0] frozen,
  output logic [3:0] u,
  output logic [3:0] enc
);
  llr_t a0, a1, b0, b1, f01, g01, f23, g23;

  unified_type1 u_fa0 (.mode(MODE_SC), .a(llr[0]), .b(llr[2]),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(a0));
  unified_type1 u_fa1 (.mode(MODE_SC), .a(llr[1]), .b(llr[3]),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(a1));
  unified_type1 u_f01 (.mode(MODE_SC), .a(a0), .b(a1),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(f01));
  assign u[0] = !frozen[0] && llr_hard(f01);
  unified_type2 u_g01 (.mode(MODE_SC), .a(a0), .b(a1), .u_sum(u[0]),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(g01));
  assign u[1] = !frozen[1] && llr_hard(g01);

  unified_type2 u_gb0 (.mode(MODE_SC), .a(llr[0]), .b(llr[2]), .u_sum(u[0] ^ u[1]),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(b0));
  unified_type2 u_gb1 (.mode(MODE_SC), .a(llr[1]), .b(llr[3]), .u_sum(u[1]),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(b1));
  unified_type1 u_f23 (.mode(MODE_SC), .a(b0), .b(b1),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(f23));
  assign u[2] = !frozen[2] && llr_hard(f23);
  unified_type2 u_g23 (.mode(MODE_SC), .a(b0), .b(b1), .u_sum(u[2]),
                       .in1_bp(LLR_ZERO), .in2_bp(LLR_ZERO), .in3_bp(LLR_ZERO), .d(g23));
  assign u[3] = !frozen[3] && llr_hard(g23);

  assign enc = {u[3], u[2] ^ u[3], u[1] ^ u[3], u[0] ^ u[1] ^ u[2] ^ u[3]};
endmodule
