// hybrid_ctrl: configurable FSM of the hybrid BP-SC polar decoder.
//
// A frame starts with a one-cycle 'start' (load: the array samples the channel
// LLRs, all messages and partial sums are cleared). Then, by cfg_mode:
//
// BP phase (CFG_HYBRID, CFG_BP_ONLY). A cycle counter c runs from 1. Stage j
// (1..M) is enabled in cycle c when c >= j, c - j is even and (c - j)/2 <
// max_iter, so odd and even stages alternate and stage j runs its t-th
// iteration in cycle j + 2t. Iteration t is finished when stage M has run it
// (cycle M + 2t); in the next cycle the early-stop result is sampled. If it
// holds, the hard u decisions are the result: latency 2v + M cycles from start
// to dec_valid for v iterations. If max_iter iterations pass without success,
// CFG_BP_ONLY outputs the last hard decisions, while CFG_HYBRID overwrites the
// channel column with the denoised LLRs (L + R at the x side) in that cycle and
// moves to SC.
//
// SC phase (CFG_HYBRID after a BP failure, CFG_SC_ONLY). The SC tree is walked
// down to 8-bit leaves (nodes of stage 3). Each f or g step of a node of stage
// j >= 4 takes one cycle; each leaf takes two (LEAF_F decodes bits 0..3, LEAF_G
// bits 4..7). After leaf p the walk continues with the g step at stage 4 + t,
// t = number of trailing zeros of p+1, then f steps down to stage 4. The SC
// phase takes N/2 - 2 cycles, the latency of an 8-bit output SC decoder.
//
// dec_valid pulses for one cycle with dec_u (decoded u vector), dec_from_sc,
// dec_bp_ok (early stop fired), dec_iters (BP iterations run) and dec_cycles
// (cycles from start to dec_valid). 'start' is ignored while busy.
// The stage schedule and the flow follow the published BP/SC schedules and
// the hybrid flow chart; counter widths, the output format and the handshake
// are this design's.
module hybrid_ctrl
  import polar_pkg::*;
#(
  parameter int N   = 1024,
  parameter int MIW = 9,       // width of max_iter
  localparam int M  = $clog2(N),
  localparam int SW = $clog2(M + 1),
  localparam int PW = (M > 3) ? M - 3 : 1,
  localparam int CW = MIW + SW + 2,
  localparam int LW = MIW + M + 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cfg_mode_e      cfg_mode,
  input  logic [MIW-1:0] max_iter,
  input  logic           es_valid,
  input  logic [N-1:0]   u_hard,
  input  logic [3:0]     leaf_u,
  // to the array and the partial-sum memory
  output logic           load,
  output logic [M:1]     bp_stage_en,
  output logic           denoise,
  output logic           sc_en,
  output logic [SW-1:0]  sc_stage,
  output logic [PW-1:0]  sc_node,
  output logic           sc_g,
  output logic           ps_wr_f,
  output logic           ps_wr_g,
  output logic [PW-1:0]  leaf_p,
  // status and result
  output logic           busy,
  output logic           dec_valid,
  output logic [N-1:0]   dec_u,
  output logic           dec_from_sc,
  output logic           dec_bp_ok,
  output logic [MIW-1:0] dec_iters,
  output logic [LW-1:0]  dec_cycles
);
  typedef enum logic [2:0] {S_IDLE, S_BP, S_SC_F, S_SC_G, S_LEAF_F, S_LEAF_G} state_e;

  state_e         state;
  cfg_mode_e      mode_q;
  logic [MIW-1:0] max_q;
  logic [CW-1:0]  c;
  logic [LW-1:0]  cyc;
  logic [SW-1:0]  stage;
  logic [PW-1:0]  p;
  logic           check, last_iter;
  logic [MIW-1:0] iters_now;

  localparam logic [PW-1:0] P_LAST = PW'((N / 8) - 1);

  function automatic logic [SW-1:0] g_stage_after(logic [PW-1:0] pn);
    int t;
    t = 0;
    for (int b = PW - 1; b >= 0; b--) if (pn[b]) t = b;
    return SW'(4 + t);
  endfunction

  // Early-stop check cycle: c = M + 2t + 1, after iteration t has ended.
  assign check     = (state == S_BP) && (c > CW'(M)) && ((c - CW'(M)) % 2 == 1);
  assign iters_now = MIW'((c - CW'(M) + CW'(1)) >> 1);
  assign last_iter = iters_now >= max_q;

  always_comb begin
    for (int j = 1; j <= M; j++) begin
      bp_stage_en[j] = (state == S_BP) && (c >= CW'(j)) && ((c - CW'(j)) % 2 == 0)
                       && (((c - CW'(j)) >> 1) < CW'(max_q));
    end
  end

  assign load     = (state == S_IDLE) && start;
  assign denoise  = check && !es_valid && last_iter && (mode_q == CFG_HYBRID);
  assign sc_en    = (state == S_SC_F) || (state == S_SC_G) || (state == S_LEAF_F) || (state == S_LEAF_G);
  assign sc_stage = ((state == S_LEAF_F) || (state == S_LEAF_G)) ? SW'(3) : stage;
  assign sc_node  = PW'(p >> (sc_stage - SW'(3)));
  assign sc_g     = (state == S_SC_G) || (state == S_LEAF_G);
  assign ps_wr_f  = (state == S_LEAF_F);
  assign ps_wr_g  = (state == S_LEAF_G);
  assign leaf_p   = p;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      mode_q      <= CFG_HYBRID;
      max_q       <= '0;
      c           <= '0;
      cyc         <= '0;
      stage       <= '0;
      p           <= '0;
      dec_valid   <= 1'b0;
      dec_u       <= '0;
      dec_from_sc <= 1'b0;
      dec_bp_ok   <= 1'b0;
      dec_iters   <= '0;
      dec_cycles  <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (state != S_IDLE) cyc <= cyc + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          mode_q      <= cfg_mode;
          max_q       <= (max_iter == '0) ? MIW'(1) : max_iter;
          cyc         <= LW'(1);
          c           <= CW'(1);
          p           <= '0;
          dec_from_sc <= 1'b0;
          dec_bp_ok   <= 1'b0;
          dec_iters   <= '0;
          if (cfg_mode == CFG_SC_ONLY) begin
            stage <= SW'(M);
            state <= (M > 3) ? S_SC_F : S_LEAF_F;
          end else begin
            state <= S_BP;
          end
        end
        S_BP: begin
          c <= c + 1'b1;
          if (check && (es_valid || last_iter)) begin
            dec_iters <= iters_now;
            if (es_valid || mode_q != CFG_HYBRID) begin
              dec_u      <= u_hard;
              dec_bp_ok  <= es_valid;
              dec_valid  <= 1'b1;
              dec_cycles <= cyc + 1'b1;
              state      <= S_IDLE;
            end else begin
              stage <= SW'(M);
              state <= (M > 3) ? S_SC_F : S_LEAF_F;
            end
          end
        end
        S_SC_F: begin
          if (stage == SW'(4)) state <= S_LEAF_F;
          else                 stage <= stage - 1'b1;
        end
        S_SC_G: begin
          if (stage == SW'(4)) state <= S_LEAF_F;
          else begin
            stage <= stage - 1'b1;
            state <= S_SC_F;
          end
        end
        S_LEAF_F: begin
          dec_u[8 * int'(p) +: 4] <= leaf_u;
          state <= S_LEAF_G;
        end
        S_LEAF_G: begin
          dec_u[8 * int'(p) + 4 +: 4] <= leaf_u;
          if (p == P_LAST) begin
            dec_from_sc <= 1'b1;
            dec_valid   <= 1'b1;
            dec_cycles  <= cyc + 1'b1;
            state       <= S_IDLE;
          end else begin
            p     <= p + 1'b1;
            stage <= g_stage_after(p + 1'b1);
            state <= S_SC_G;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
