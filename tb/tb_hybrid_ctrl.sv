// tb_hybrid_ctrl: the FSM alone, N = 32, with the early-stop result and the
// leaf decisions driven by the testbench. Checked every cycle: the BP stage
// enables against the schedule "stage j runs iteration t in cycle j + 2t", the
// cycle of the early-stop decision, the denoise pulse, and the whole SC step
// sequence against a depth-first walk of the SC tree; at the end dec_u,
// dec_iters, dec_cycles and the time from start to dec_valid.
module tb_hybrid_ctrl;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  localparam int N = 32;
  localparam int M = 5;
  localparam int MIW = 9;
  logic rst_n, start, es_valid;
  cfg_mode_e cfg_mode;
  logic [MIW-1:0] max_iter;
  logic [N-1:0] u_hard;
  logic [3:0] leaf_u;
  logic load, denoise, sc_en, sc_g, ps_wr_f, ps_wr_g, busy, dec_valid, dec_from_sc, dec_bp_ok;
  logic [M:1] bp_stage_en;
  logic [2:0] sc_stage;
  logic [1:0] sc_node, leaf_p;
  logic [N-1:0] dec_u;
  logic [MIW-1:0] dec_iters;
  logic [MIW+M+1:0] dec_cycles;
  int n_early, n_fallback, n_bponly, n_sconly;

  hybrid_ctrl #(.N(N), .MIW(MIW)) dut (.*);

  // expected SC steps: {stage, g, node}
  int exp_st[$], exp_g[$], exp_nd[$];
  task automatic build_sc_walk();
    int st_j[$], st_i[$], st_ph[$];
    int j, i, ph;
    exp_st.delete(); exp_g.delete(); exp_nd.delete();
    st_j.push_back(M); st_i.push_back(0); st_ph.push_back(0);
    while (st_j.size() > 0) begin
      j = st_j.pop_back(); i = st_i.pop_back(); ph = st_ph.pop_back();
      if (j == 3) begin
        exp_st.push_back(3); exp_g.push_back(0); exp_nd.push_back(i);
        exp_st.push_back(3); exp_g.push_back(1); exp_nd.push_back(i);
      end else if (ph == 0) begin
        exp_st.push_back(j); exp_g.push_back(0); exp_nd.push_back(i);
        st_j.push_back(j); st_i.push_back(i); st_ph.push_back(1);
        st_j.push_back(j - 1); st_i.push_back(2 * i); st_ph.push_back(0);
      end else begin
        exp_st.push_back(j); exp_g.push_back(1); exp_nd.push_back(i);
        st_j.push_back(j - 1); st_i.push_back(2 * i + 1); st_ph.push_back(0);
      end
    end
  endtask

  // one frame; succeed_at = iteration whose check reports success (0 = never)
  task automatic run(cfg_mode_e mode, int maxit, int succeed_at);
    int c, k, t, lat, exp_lat, iters;
    logic [N-1:0] exp_u, uh;
    bit in_sc;
    build_sc_walk();
    for (int r = 0; r < N; r++) uh[r] = 1'($urandom_range(1));
    u_hard = uh;
    @(negedge clk);
    cfg_mode = mode; max_iter = MIW'(maxit); start = 1'b1;
    #1 check(load == 1'b1, "load with start");
    @(negedge clk);
    start = 1'b0;
    c = 1; k = 0; lat = 1; in_sc = (mode == CFG_SC_ONLY); iters = 0;
    exp_u = '0;
    while (!dec_valid && lat < 5000) begin
      es_valid = 1'b0;
      if (!in_sc) begin
        #1;
        for (int j = 1; j <= M; j++)
          check(bp_stage_en[j] == ((c >= j) && ((c - j) % 2 == 0) && ((c - j) / 2 < maxit)),
                $sformatf("stage %0d enable at cycle %0d", j, c));
        check(!sc_en, "no SC in BP phase");
        if (c > M && (c - M) % 2 == 1) begin
          t = (c - M - 1) / 2 + 1;
          es_valid = (t == succeed_at);
          #1;
          check(denoise == (!es_valid && t == maxit && mode == CFG_HYBRID), $sformatf("denoise at %0d", c));
          if (es_valid || t == maxit) begin
            iters = t;
            if (es_valid) n_early++;
            else if (mode == CFG_HYBRID) begin n_fallback++; in_sc = 1'b1; end
            else n_bponly++;
          end
        end else begin
          check(!denoise, "no denoise");
        end
        c++;
      end else begin
        #1;
        check(bp_stage_en == '0, "no BP in SC phase");
        check(sc_en, "sc_en");
        check(k < exp_st.size() && int'(sc_stage) == exp_st[k] && int'(sc_g) == exp_g[k] && int'(sc_node) == exp_nd[k],
              $sformatf("SC step %0d: stage %0d g %0d node %0d", k, sc_stage, sc_g, sc_node));
        check(ps_wr_f == (sc_stage == 3 && !sc_g) && ps_wr_g == (sc_stage == 3 && sc_g), "ps writes");
        if (sc_stage == 3) begin
          check(int'(leaf_p) == int'(sc_node), "leaf_p");
          leaf_u = 4'($urandom_range(15));
          exp_u[8 * int'(leaf_p) + (sc_g ? 4 : 0) +: 4] = leaf_u;
        end
        k++;
      end
      @(negedge clk);
      lat++;
    end
    if (mode == CFG_SC_ONLY) n_sconly++;
    if (in_sc) begin
      check(k == N / 2 - 2, $sformatf("SC steps %0d", k));
      check(dec_u == exp_u && dec_from_sc, "SC result");
      exp_lat = (mode == CFG_SC_ONLY) ? N / 2 - 1 : M + 2 * maxit + N / 2 - 2;
    end else begin
      check(dec_u == uh && !dec_from_sc, "BP result");
      check(dec_bp_ok == (iters == succeed_at), "bp ok flag");
      exp_lat = M + 2 * iters;
    end
    if (mode != CFG_SC_ONLY) check(int'(dec_iters) == iters, $sformatf("iters %0d", dec_iters));
    check(lat == exp_lat && int'(dec_cycles) == exp_lat, $sformatf("latency %0d/%0d exp %0d", lat, dec_cycles, exp_lat));
  endtask

  initial begin
    rst_n = 0; start = 0; es_valid = 0; cfg_mode = CFG_HYBRID; max_iter = '0; u_hard = '0; leaf_u = '0;
    n_early = 0; n_fallback = 0; n_bponly = 0; n_sconly = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(CFG_HYBRID, 6, 3);
    run(CFG_HYBRID, 6, 1);
    run(CFG_HYBRID, 4, 0);
    run(CFG_BP_ONLY, 5, 0);
    run(CFG_BP_ONLY, 5, 5);
    run(CFG_SC_ONLY, 5, 0);
    run(CFG_HYBRID, 1, 0);
    check(n_early > 0 && n_fallback > 0 && n_bponly > 0 && n_sconly > 0, "all paths taken");
    finish_tb();
  end
endmodule
