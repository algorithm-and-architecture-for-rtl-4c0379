// tb_unified_array: N = 16 array against the integer BP/SC reference.
// BP: random channel LLRs and frozen mask, stages enabled on the hardware
// schedule and on random non-adjacent sets; u_hard and x_hard compared with
// the reference after every cycle. Then denoise, and SC steps on the denoised
// column: f and g of stage 4 and the stage-3 leaf taps (f and g) compared
// value by value.
module tb_unified_array;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  localparam int N = 16;
  localparam int M = 4;
  logic          load, denoise, sc_en, sc_g;
  llr_t          ch_llr [N];
  logic [N-1:0]  frozen;
  logic [M:1]    bp_stage_en;
  logic [2:0]    sc_stage;
  logic [0:0]    sc_node;
  logic [N-1:0]  ps_col [1:M];
  logic [N-1:0]  u_hard, x_hard;
  llr_t          leaf_llr [4];
  int ch[], L[], R[], dn[], l4[];
  bit fz[], uh[], xh[];
  int en_prev;

  unified_array #(.N(N)) dut (.clk, .load, .ch_llr, .frozen, .denoise, .bp_stage_en,
    .sc_en, .sc_stage, .sc_node, .sc_g, .ps_col, .u_hard, .x_hard, .leaf_llr);

  task automatic compare_hard(string tag);
    bp_hard(N, L, R, fz, uh, xh);
    for (int r = 0; r < N; r++) begin
      check(u_hard[r] == uh[r], $sformatf("%s u_hard[%0d]", tag, r));
      check(x_hard[r] == xh[r], $sformatf("%s x_hard[%0d]", tag, r));
    end
  endtask

  initial begin
    load = 0; denoise = 0; sc_en = 0; sc_g = 0; bp_stage_en = '0; sc_stage = '0; sc_node = '0;
    for (int j = 1; j <= M; j++) ps_col[j] = '0;
    for (int frame = 0; frame < 6; frame++) begin
      ch = new[N]; fz = new[N];
      for (int r = 0; r < N; r++) begin
        ch[r] = int'($urandom_range(80)) - 30;
        fz[r] = ($urandom_range(1) == 1);
        ch_llr[r] = to_llr(ch[r]);
        frozen[r] = fz[r];
      end
      @(negedge clk);
      load = 1;
      @(negedge clk);
      load = 0;
      bp_init(ch, fz, L, R);
      #1 compare_hard("after load");
      // 12 cycles of the hardware schedule, then 12 random non-adjacent sets
      for (int c = 1; c <= 24; c++) begin
        en_prev = 0;
        for (int j = 1; j <= M; j++) begin
          if (c <= 12) bp_stage_en[j] = (c >= j) && ((c - j) % 2 == 0);
          else bp_stage_en[j] = !en_prev && ($urandom_range(1) == 1);
          en_prev = bp_stage_en[j];
        end
        @(negedge clk);
        for (int j = 1; j <= M; j++) if (bp_stage_en[j]) bp_stage(N, j, L, R);
        bp_stage_en = '0;
        #1 compare_hard($sformatf("frame %0d cycle %0d", frame, c));
      end
      // denoise the channel column
      denoise = 1;
      @(negedge clk);
      denoise = 0;
      dn = new[N];
      for (int r = 0; r < N; r++) dn[r] = sat(L[(M + 1) * N + r] + R[(M + 1) * N + r]);
      // SC: stage 4 f of node 0 writes rows 0..7 of column 4
      for (int j = 1; j <= M; j++) for (int r = 0; r < N; r++) ps_col[j][r] = 1'($urandom_range(1));
      l4 = new[N];
      sc_en = 1; sc_stage = 3'd4; sc_node = 1'b0; sc_g = 0;
      @(negedge clk);
      for (int r = 0; r < 8; r++) l4[r] = ref_f(dn[r], dn[r + 8]);
      // leaf taps of node 0, f then g
      sc_stage = 3'd3; sc_node = 1'b0; sc_g = 0;
      #1;
      for (int q = 0; q < 4; q++)
        check(from_llr(leaf_llr[q]) == ref_f(l4[q], l4[q + 4]), $sformatf("leaf f %0d", q));
      sc_g = 1;
      #1;
      for (int q = 0; q < 4; q++)
        check(from_llr(leaf_llr[q]) == ref_g(l4[q], l4[q + 4], ps_col[3][q]), $sformatf("leaf g %0d", q));
      // stage 4 g of node 0 writes rows 8..15 of column 4
      @(negedge clk);
      sc_stage = 3'd4; sc_node = 1'b0; sc_g = 1;
      @(negedge clk);
      for (int r = 0; r < 8; r++) l4[r + 8] = ref_g(dn[r], dn[r + 8], ps_col[4][r]);
      sc_stage = 3'd3; sc_node = 1'b1; sc_g = 0;
      #1;
      for (int q = 0; q < 4; q++)
        check(from_llr(leaf_llr[q]) == ref_f(l4[8 + q], l4[12 + q]), $sformatf("leaf1 f %0d", q));
      sc_g = 1;
      #1;
      for (int q = 0; q < 4; q++)
        check(from_llr(leaf_llr[q]) == ref_g(l4[8 + q], l4[12 + q], ps_col[3][8 + q]), $sformatf("leaf1 g %0d", q));
      sc_en = 0;
    end
    finish_tb();
  end
endmodule
