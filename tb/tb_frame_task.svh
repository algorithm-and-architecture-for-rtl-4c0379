// tb_frame_task.svh: decoder instance and one-frame stimulus/check task shared
// by the end-to-end testbenches. Needs N, K, M, MIW and the tb_common.svh
// counters in scope; the including testbench instantiates the decoder as dut.
  logic           rst_n, start;
  cfg_mode_e      cfg_mode;
  logic [MIW-1:0] max_iter;
  llr_t           ch_llr [N];
  logic [N-1:0]   frozen;
  logic           busy, dec_valid, dec_from_sc, dec_bp_ok;
  logic [N-1:0]   dec_u;
  logic [MIW-1:0] dec_iters;
  logic [MIW+M+1:0] dec_cycles;
  bit             fz[];
  int n_early, n_fallback, n_bponly, n_sconly, n_frames, n_bit_err;

  task automatic init_tb();
    rst_n = 1'b0; start = 1'b0; cfg_mode = CFG_HYBRID; max_iter = '0; frozen = '0;
    for (int r = 0; r < N; r++) ch_llr[r] = LLR_ZERO;
    construct(N, K, 2.0, fz);
    n_early = 0; n_fallback = 0; n_bponly = 0; n_sconly = 0; n_frames = 0; n_bit_err = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
  endtask

  task automatic run_frame(cfg_mode_e mode, real ebn0, int maxit);
    bit u[], x[], ref_u[], bp_u[];
    int ch[], dn[];
    int iters, lat, exp_lat;
    bit ok, from_sc;
    u = new[N];
    for (int r = 0; r < N; r++) u[r] = fz[r] ? 1'b0 : 1'($urandom_range(1));
    encode(u, x);
    channel(x, ebn0, real'(K) / real'(N), ch);
    // reference
    from_sc = 1'b0;
    if (mode == CFG_SC_ONLY) begin
      sc_decode(ch, fz, ref_u);
      from_sc = 1'b1;
      exp_lat = N / 2 - 1;
    end else begin
      bp_decode(ch, fz, maxit, bp_u, iters, ok, dn);
      ref_u = bp_u;
      exp_lat = M + 2 * iters;
      if (!ok && mode == CFG_HYBRID) begin
        sc_decode(dn, fz, ref_u);
        from_sc = 1'b1;
        exp_lat = M + 2 * maxit + N / 2 - 2;
      end
    end
    // drive
    @(negedge clk);
    for (int r = 0; r < N; r++) begin
      ch_llr[r] = to_llr(ch[r]);
      frozen[r] = fz[r];
    end
    cfg_mode = mode; max_iter = MIW'(maxit); start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!dec_valid && lat < 20000) begin
      @(negedge clk);
      lat++;
    end
    n_frames++;
    for (int r = 0; r < N; r++) begin
      check(dec_u[r] == ref_u[r], $sformatf("frame %0d bit %0d", n_frames, r));
      if (dec_u[r] != u[r]) n_bit_err++;
    end
    check(dec_from_sc == from_sc, $sformatf("frame %0d path", n_frames));
    check(lat == exp_lat && int'(dec_cycles) == exp_lat,
          $sformatf("frame %0d latency %0d/%0d exp %0d", n_frames, lat, dec_cycles, exp_lat));
    if (mode != CFG_SC_ONLY) begin
      check(int'(dec_iters) == iters, $sformatf("frame %0d iters %0d exp %0d", n_frames, dec_iters, iters));
      check(dec_bp_ok == ok, $sformatf("frame %0d bp_ok", n_frames));
      if (ok) n_early++;
      else if (mode == CFG_HYBRID) n_fallback++;
      else n_bponly++;
    end else n_sconly++;
  endtask

  task automatic report_mechanisms();
    $display("frames=%0d early_stop=%0d sc_fallback=%0d bp_only_fail=%0d sc_only=%0d bit_errors_vs_sent=%0d",
             n_frames, n_early, n_fallback, n_bponly, n_sconly, n_bit_err);
    check(n_early > 0, "early stop never happened");
    check(n_fallback > 0, "SC fallback never happened");
    check(n_bponly > 0, "BP-only failure never happened");
    check(n_sconly > 0, "SC-only mode never ran");
  endtask
