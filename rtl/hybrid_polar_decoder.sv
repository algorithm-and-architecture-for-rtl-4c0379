// hybrid_polar_decoder: hybrid BP-SC polar decoder on unified BP/SC hardware.
//
// A frame of N channel LLRs is first decoded by belief propagation (BP) with an
// early stopping test after every iteration. If BP finds a valid codeword the
// hard u decisions are the result. If it does not within max_iter iterations,
// the x-side soft outputs of BP (channel LLR plus the R messages that reached
// the channel side), which are less noisy than the channel LLRs, replace the
// channel LLRs and a successive-cancellation (SC) decoder with 8-bit leaves
// decodes the frame from them. BP and SC run on the same array of unified PEs
// (unified_array); the configurable FSM (hybrid_ctrl) sets the PEs to BP or SC
// mode and schedules the stages. cfg_mode can also select BP only or SC only.
//
// Interface: ch_llr, frozen (1 = frozen bit, decoded as 0), cfg_mode and
// max_iter are sampled in the cycle in which start is high and the decoder is
// idle (busy low). The result appears with a one-cycle dec_valid pulse. Timing:
// BP success after v iterations gives dec_valid 2v + log2(N) cycles after
// start; a hybrid frame that falls back to SC takes 2*max_iter + log2(N) - 1 +
// N/2 - 2 cycles (640 for N = 1024, max_iter = 60); SC only takes N/2 - 1.
// The flow follows the published hybrid scheme; the port list and handshake
// are this design's.
module hybrid_polar_decoder
  import polar_pkg::*;
#(
  parameter int N   = 1024,
  parameter int MIW = 9,
  localparam int M  = $clog2(N),
  localparam int SW = $clog2(M + 1),
  localparam int PW = (M > 3) ? M - 3 : 1,
  localparam int LW = MIW + M + 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cfg_mode_e      cfg_mode,
  input  logic [MIW-1:0] max_iter,
  input  llr_t           ch_llr [N],
  input  logic [N-1:0]   frozen,
  output logic           busy,
  output logic           dec_valid,
  output logic [N-1:0]   dec_u,
  output logic           dec_from_sc,
  output logic           dec_bp_ok,
  output logic [MIW-1:0] dec_iters,
  output logic [LW-1:0]  dec_cycles
);
  logic [N-1:0]  frozen_q;
  logic          load, denoise, sc_en, sc_g, ps_wr_f, ps_wr_g, es_valid;
  logic [M:1]    bp_stage_en;
  logic [SW-1:0] sc_stage;
  logic [PW-1:0] sc_node, leaf_p;
  logic [N-1:0]  u_hard, x_hard;
  logic [N-1:0]  ps_col [1:M];
  llr_t          leaf_llr [4];
  logic [3:0]    leaf_u, leaf_enc, leaf_frozen;

  // Frozen-bit mask of the frame being decoded.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    frozen_q <= '0;
    else if (load) frozen_q <= frozen;
  end

  hybrid_ctrl #(.N(N), .MIW(MIW)) u_ctrl (
    .clk, .rst_n, .start, .cfg_mode, .max_iter,
    .es_valid, .u_hard, .leaf_u,
    .load, .bp_stage_en, .denoise, .sc_en, .sc_stage, .sc_node, .sc_g,
    .ps_wr_f, .ps_wr_g, .leaf_p,
    .busy, .dec_valid, .dec_u, .dec_from_sc, .dec_bp_ok, .dec_iters, .dec_cycles);

  unified_array #(.N(N)) u_array (
    .clk, .load, .ch_llr, .frozen(frozen_q), .denoise, .bp_stage_en,
    .sc_en, .sc_stage, .sc_node, .sc_g, .ps_col,
    .u_hard, .x_hard, .leaf_llr);

  early_stop #(.N(N)) u_es (.u_hard, .x_hard, .valid(es_valid));

  assign leaf_frozen = frozen_q[8 * int'(leaf_p) + (sc_g ? 4 : 0) +: 4];

  sc_leaf4 u_leaf (.llr(leaf_llr), .frozen(leaf_frozen), .u(leaf_u), .enc(leaf_enc));

  sc_psum #(.N(N)) u_psum (
    .clk, .clear(load), .wr_f(ps_wr_f), .wr_g(ps_wr_g), .leaf_p,
    .enc(leaf_enc), .ps_col);
endmodule
