// tb_hybrid_polar_decoder: end-to-end test of the hybrid decoder at N = 64,
// K = 32 (frozen set from the Bhattacharyya bound at 2 dB).
// Random messages are encoded, sent over BPSK/AWGN and decoded in the three
// configurations. Every frame is compared bit for bit with the integer
// reference (BP with the same schedule and early stopping; on failure SC on
// the denoised LLRs), and the latency is checked against 2v + log2(N) for a
// BP success, 2*max_iter + log2(N) + N/2 - 2 for an SC fallback and N/2 - 1
// for SC only. Counted mechanisms: early stop, fallback to SC with denoised
// LLRs, BP-only failure, SC-only decoding; each must occur at least once.
module tb_hybrid_polar_decoder;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`define WATCHDOG_CYCLES 400000
`include "tb_common.svh"
  localparam int N = 64;
  localparam int K = 32;
  localparam int M = 6;
  localparam int MIW = 9;
`include "tb_frame_task.svh"

  hybrid_polar_decoder #(.N(N), .MIW(MIW)) dut (.*);

  initial begin
    init_tb();
    for (int f = 0; f < 12; f++) run_frame(CFG_HYBRID, 4.0, 60);
    for (int f = 0; f < 12; f++) run_frame(CFG_HYBRID, 1.0, 3);
    for (int f = 0; f < 6; f++)  run_frame(CFG_BP_ONLY, 0.5, 4);
    for (int f = 0; f < 6; f++)  run_frame(CFG_SC_ONLY, 2.5, 60);
    report_mechanisms();
    finish_tb();
  end
endmodule
