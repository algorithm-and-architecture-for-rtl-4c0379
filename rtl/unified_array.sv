// unified_array: the shared BP/SC datapath of the hybrid polar decoder.
//
// The factor graph of an N-bit polar code has M = log2(N) stages between M+1
// node columns: column 1 is the u side (decoded bits), column M+1 the x side
// (channel). Stage j pairs row i with row i+s, s = 2^(j-1), exactly as the
// encoder x = uG does. Every stage holds N/2 unified PEs, each with four unified
// blocks, and owns the message registers it writes:
//   L messages of column j   (leftward, towards u)
//   R messages of column j+1 (rightward, towards x)
// Column M+1 holds the channel LLRs (L) and column 1 the a-priori R messages
// (+max for frozen rows, 0 for information rows, formed from 'frozen').
//
// BP mode: every stage whose bit in bp_stage_en is set updates all its L and R
// registers in that cycle. The controller never enables two adjacent stages at
// once, so each register has one writer and every read sees settled values.
// SC mode: the PEs are switched to f/g (mode MODE_SC); only the PEs of stage
// sc_stage that belong to SC tree node sc_node write, the upper-row L register
// for f (sc_g = 0) or the lower-row L register for g (sc_g = 1). The partial
// sums for g come from ps_col. The outputs of the stage-3 PEs of the selected
// node are also brought out unregistered (leaf_llr) for the leaf decoder.
// load clears all messages and samples ch_llr; denoise replaces the channel
// column by the soft x estimate L + R (the denoised channel LLRs).
// u_hard / x_hard are the hard decisions of the soft u and x estimates; frozen
// rows of u_hard read 0.
// The stage/row arrangement follows the encoder; the register organisation,
// the load/denoise ports and the leaf tap are this design's choices.
module unified_array
  import polar_pkg::*;
#(
  parameter int N  = 1024,
  localparam int M  = $clog2(N),
  localparam int SW = $clog2(M + 1),
  localparam int NW = (M > 3) ? M - 3 : 1
) (
  input  logic          clk,
  input  logic          load,
  input  llr_t          ch_llr [N],
  input  logic [N-1:0]  frozen,
  input  logic          denoise,
  input  logic [M:1]    bp_stage_en,
  input  logic          sc_en,
  input  logic [SW-1:0] sc_stage,
  input  logic [NW-1:0] sc_node,
  input  logic          sc_g,
  input  logic [N-1:0]  ps_col [1:M],
  output logic [N-1:0]  u_hard,
  output logic [N-1:0]  x_hard,
  output llr_t          leaf_llr [4]
);
  llr_t lcol [1:M+1][N];
  llr_t rcol [1:M+1][N];
  llr_t ch_q [N];
  llr_t st3_f [N/2];
  llr_t st3_g [N/2];
  pe_mode_e mode;

  assign mode = sc_en ? MODE_SC : MODE_BP;

  // Channel column (L of column M+1) and a-priori column (R of column 1).
  for (genvar i = 0; i < N; i++) begin : g_edge
    always_ff @(posedge clk) begin
      if (load)         ch_q[i] <= ch_llr[i];
      else if (denoise) ch_q[i] <= llr_add_sat(ch_q[i], rcol[M+1][i]);
    end
    assign lcol[M+1][i] = ch_q[i];
    assign rcol[1][i]   = frozen[i] ? LLR_POS_MAX : LLR_ZERO;
    assign u_hard[i]    = !frozen[i] && llr_hard(llr_add_sat(lcol[1][i], rcol[1][i]));
    assign x_hard[i]    = llr_hard(llr_add_sat(ch_q[i], rcol[M+1][i]));
  end

  for (genvar j = 1; j <= M; j++) begin : g_stage
    localparam int S = 1 << (j - 1);
    for (genvar k = 0; k < N/2; k++) begin : g_pe
      localparam int I = (k / S) * 2 * S + (k % S);
      llr_t l_up_n, l_lo_n, r_up_n, r_lo_n;
      llr_t l_up_q, l_lo_q, r_up_q, r_lo_q;
      logic sc_sel;

      unified_pe u_pe (
        .mode    (mode),
        .l_in_up (lcol[j+1][I]),
        .l_in_lo (lcol[j+1][I+S]),
        .r_in_up (rcol[j][I]),
        .r_in_lo (rcol[j][I+S]),
        .ps_up   (ps_col[j][I]),
        .l_out_up(l_up_n),
        .l_out_lo(l_lo_n),
        .r_out_up(r_up_n),
        .r_out_lo(r_lo_n));

      assign sc_sel = sc_en && (sc_stage == SW'(j)) && ((I >> j) == int'(sc_node));

      always_ff @(posedge clk) begin
        if (load) begin
          l_up_q <= LLR_ZERO;
          l_lo_q <= LLR_ZERO;
          r_up_q <= LLR_ZERO;
          r_lo_q <= LLR_ZERO;
        end else if (bp_stage_en[j]) begin
          l_up_q <= l_up_n;
          l_lo_q <= l_lo_n;
          r_up_q <= r_up_n;
          r_lo_q <= r_lo_n;
        end else if (sc_sel) begin
          if (!sc_g) l_up_q <= l_up_n;
          else       l_lo_q <= l_lo_n;
        end
      end

      assign lcol[j][I]     = l_up_q;
      assign lcol[j][I+S]   = l_lo_q;
      assign rcol[j+1][I]   = r_up_q;
      assign rcol[j+1][I+S] = r_lo_q;

      if (j == 3) begin : g_tap
        assign st3_f[k] = l_up_n;
        assign st3_g[k] = l_lo_n;
      end
    end
  end

  // Leaf tap: the four stage-3 outputs of node sc_node (rows 8*node .. 8*node+3
  // for f, rows 8*node+4 .. 8*node+7 for g), taken before the registers.
  for (genvar q = 0; q < 4; q++) begin : g_leaf
    assign leaf_llr[q] = sc_g ? st3_g[4 * int'(sc_node) + q] : st3_f[4 * int'(sc_node) + q];
  end
endmodule
