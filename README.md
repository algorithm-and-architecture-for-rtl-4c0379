# Hybrid BP–SC polar decoder on a unified PE array

Polar codes can be decoded by belief propagation (BP) or by successive
cancellation (SC). BP is parallel and fast when it converges, but with a
fixed iteration budget it leaves some frames undecoded. SC is serial and
slow, but it does not depend on convergence. This decoder combines the two.
Every frame is first decoded by BP, with an early-stopping test after each
iteration. Most frames at useful SNR stop early, so the average latency is
that of BP. If BP has not found a valid codeword after `max_iter`
iterations, it hands SC a cleaned-up version of the channel values. These
are the soft x-side outputs of BP (channel LLR plus the message BP has sent
to the channel side), which carry less noise than the raw channel LLRs. SC
then decodes the frame from them.

The point of the hardware is that SC needs no hardware of its own. The SC
functions f and g are special cases of the two min-sum BP node updates. So
one array of "unified" processing elements (PEs) runs both algorithms. A mux
select on each PE chooses SC or BP operands.

The RTL is SystemVerilog (IEEE 1800-2017). Its default size is the
(1024, 512) code with `max_iter = 60`:

| quantity | value |
|---|---|
| code length N | 1024 (parameter `N`) |
| PEs | N/2 · log2 N = 5120, each with 2 Type-I and 2 Type-II blocks |
| LLR word | sign + 6-bit magnitude |
| BP latency, v iterations | 2v + log2 N cycles, start to `dec_valid` |
| SC latency | N/2 − 2 = 510 cycles (8-bit leaves) |
| hybrid worst case | 2·60 + 10 + 510 = 640 cycles |

## The factor graph and the array

The code uses x = uG, where G is the log2 N-fold Kronecker power of
F = [1 0; 1 1]. G is lower triangular and bits are in natural order. For
example, with N = 8 and frozen positions {0, 2, 5, 7}, u = 01000010 encodes
to x = 01101010 (bit 0 written first).

The graph has M = log2 N stages between M+1 node columns:

* column 1 is the u side;
* column M+1 is the x (channel) side;
* stage j joins row i and row i + 2^(j−1) with one butterfly.

`unified_array` builds all N/2 butterflies of every stage as `unified_pe`
instances. Each stage owns the registers it writes: the L (leftward)
messages of column j and the R (rightward) messages of column j+1. Two
columns are not registers of any stage:

* L of column M+1 is the channel register. It is loaded at start and
  overwritten by the denoised values before SC runs.
* R of column 1 is the prior: +63 on frozen rows, 0 elsewhere.

No two adjacent stages ever update in the same cycle. So every register has
exactly one writer, and a stage always reads settled values.

### The unified blocks

With g(x, y) = s·sign(x)·sign(y)·min(|x|, |y|) and s = 15/16, a butterfly
has four message updates. Here l are L messages from column j+1 and r are
R messages from column j:

```
L_up = g(l_up, l_lo + r_lo)      Type-I :  s·sign(in1)·sign(in2+in3)·min(|in1|, |in2+in3|)
L_lo = g(r_up, l_up) + l_lo      Type-II:  in1 + s·sign(in2)·sign(in3)·min(|in2|, |in3|)
R_up = g(r_up, l_lo + r_lo)      Type-I
R_lo = g(r_up, l_up) + r_lo      Type-II
```

SC needs:

* f(a, b) = sign(a)·sign(b)·min(|a|, |b|). This is Type-I with in1 = a,
  in2 = b, in3 = 0 and no scaling.
* g(a, b) = (−1)^u·a + b. This is Type-II with in1 = (−1)^u·a and
  in2 = in3 = b, with sign(b) standing in for the sign product and scale.

`unified_type1` and `unified_type2` hold exactly these muxes:

* select 0 picks the SC operands, select 1 the BP operands;
* S2C (`s2c`) and C2S (`c2s`) convert between sign-magnitude and two's
  complement around the single adder; C2S saturates at ±63;
* the minimum comes from `comp_select`;
* `scale_unit` computes m − (m >> 4).

The L-side blocks of a PE switch with the array's mode. In SC mode they
compute f (upper row) and g (lower row, partial sum from `ps_col`). The
R-side blocks are only used by BP.

Two details are this design's own:

* the Type-II block bypasses its scale unit in SC mode, since g must add b
  unscaled;
* (−1)^u·a is formed by flipping a's sign bit.

## BP phase: schedule and early stopping

`hybrid_ctrl` counts cycles c = 1, 2, … after `start`. It enables stage j in
cycle c when:

* c ≥ j,
* c − j is even, and
* (c − j)/2 < `max_iter`.

So stage j runs iteration t in cycle j + 2t. Odd and even stages alternate,
and one iteration costs two cycles once the pipeline is full. For N = 8 this
gives stage 1 in cycles 1, 3, 5, 7, stage 2 in 2, 4, 6, 8 and stage 3 in
3, 5, 7, 9.

Iteration t ends when stage M has run it, in cycle M + 2t. In the next cycle
`early_stop` is sampled. It re-encodes the hard u decisions with
`polar_encoder` and compares them with the hard x decisions:

* u decisions are the sign of L + R at column 1, with frozen rows forced to 0;
* x decisions are the sign of L + R at column M+1.

If they are equal, the u decisions are the result, with `dec_valid` exactly
2v + M cycles after `start`. This test (re-encode and compare) is one of the
known early-stopping rules for polar BP. The architecture does not say which
rule it uses, so the choice here is this design's.

When `max_iter` iterations pass without success, the same check cycle does
one of two things:

* in hybrid mode it pulses `denoise`. Every channel register becomes
  sat(L + R) of column M+1, and the FSM moves to SC;
* in BP-only mode the last hard decisions are returned with
  `dec_bp_ok = 0`.

## SC phase: 8-bit leaves on the same PEs

SC walks the decoding tree depth-first. A node of stage j (2^j rows) is
handled like this:

* f step: the PEs of that node, in SC mode, write the f values into the
  upper half of column j;
* the upper child is then decoded;
* g step: the PEs write g values into the lower half. The g step uses the
  partial sums of the decoded upper child;
* the lower child is then decoded.

Only the PEs of the node selected by `sc_stage` and `sc_node` write. The
rest of the array is idle.

Leaves are the 8-row nodes of stage 3. A leaf takes two cycles:

* cycle 1 (LEAF_F): the four stage-3 PEs compute f. `sc_leaf4` decodes bits
  0–3 from these outputs in the same cycle. They are tapped before the
  registers.
* cycle 2 (LEAF_G): the PEs compute g with the partial sums of bits 0–3.
  `sc_leaf4` decodes bits 4–7.

`sc_leaf4` is a combinational chain of six unified blocks in SC mode plus
the hard-decision rule: a frozen bit is 0; otherwise the bit is 1 for a
negative LLR.

After leaf p the walk goes on in two steps:

* it does the g step of stage 4 + t, where t is the number of trailing zeros
  of p+1;
* it then does f steps down to stage 4.

Counting steps gives (N/4 − 2) one-cycle steps at stages ≥ 4 plus N/8 leaves
of two cycles each, N/2 − 2 cycles in all. That is 510 for N = 1024, the
latency of an 8-bit-output SC decoder.

`sc_psum` holds the partial sums, one bit per row for columns 3..M:

* each leaf half writes its four encoded bits u·G4 into column 3;
* when a leaf completes, its 8 encoded bits go into column 4;
* every ancestor node that the leaf completes gets (upper ⊕ lower, lower)
  one column higher, all in the same cycle.

## Interface and timing (`hybrid_polar_decoder`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start` | in | one-cycle start, taken only when `busy` is low |
| `cfg_mode` | in | `CFG_HYBRID`, `CFG_BP_ONLY`, `CFG_SC_ONLY` (`polar_pkg::cfg_mode_e`) |
| `max_iter` | in | BP iteration limit, 1..511 (0 is treated as 1) |
| `ch_llr[N]` | in | channel LLRs, `polar_pkg::llr_t` (sign, 6-bit magnitude); positive favours 0 |
| `frozen[N]` | in | 1 marks a frozen position (decoded as 0) |
| `busy` | out | a frame is in progress |
| `dec_valid` | out | one-cycle pulse with the result |
| `dec_u[N]` | out | decoded u vector (frozen positions 0) |
| `dec_from_sc`, `dec_bp_ok` | out | result came from SC; BP early stop succeeded |
| `dec_iters`, `dec_cycles` | out | BP iterations run; cycles from `start` to `dec_valid` |

`ch_llr`, `frozen`, `cfg_mode` and `max_iter` are sampled in the start cycle
and may change afterwards. Latency, from the start cycle to `dec_valid`:

* 2v + M after a BP success in v iterations;
* 2·`max_iter` + M + N/2 − 2 after a fallback to SC;
* N/2 − 1 in SC-only mode.

The decoder takes one frame at a time.

The frozen set is an input because the code construction is left to the
user. The testbenches build one from the Bhattacharyya bound. Start from
z0 = exp(−(K/N)·10^(dB/10)). For each index, apply one step per bit, most
significant bit first: z → 2z − z² for a 0 bit, z → z² for a 1 bit. Freeze
the N − K indices with the largest z.

## Where this RTL departs from, or fills in, the published architecture

* **Word length, scaling factor, saturation.** The architecture does not
  specify these. This design uses a 6-bit magnitude, s = 15/16, and
  saturation in C2S.
* **Early-stopping rule.** Re-encode-and-compare, stopping on the first
  success. This is the design's choice.
* **8-bit-output SC.** The published back-end is a reformulated 8-bit-output
  SC decoder taken from earlier work, not described in detail. This RTL
  reaches the same latency (N/2 − 2) with two 4-bit halves per 8-bit leaf.
  It does not claim to reproduce that reformulation. Its leaf decoder has
  its own six unified blocks instead of borrowing stage-1/2 PEs.
* **Small SC example.** The published n = 8 SC schedule uses 2-bit leaves
  (10 cycles). Built with N = 8, this RTL has one 8-bit leaf and takes 2 SC
  cycles.
* **Stage arrangement.** The BP graph in the source draws the stage nearest
  u with the widest row distance. The array uses the mirror arrangement
  (stage 1 joins neighbouring rows), as in the SC drawing. Both realise the
  same G, and only the mirror lets SC and BP share PEs row by row.
* **Denoised LLRs.** These are sat(channel + R) at the x side.
* **Message storage.** All messages live in flip-flops:
  2 · N · (M+1) · 7 bits, about 158 k for N = 1024. Area and clock rate were
  not evaluated. In particular, the 4-adder critical path quoted for the
  architecture is not reproduced or checked.
* **Handshake.** The start/busy/valid handshake, the status outputs and the
  run-time `cfg_mode`/`max_iter` are this design's.
* **Reset.** Only control state, the frozen mask and the result registers
  are reset. The message and partial-sum memories are cleared by the load
  at the start of each frame.

## Files

`rtl/` has one module or package per file:

* `polar_pkg` — types, widths, helper functions;
* `s2c`, `c2s`, `comp_select`, `scale_unit` — parts of the unified blocks;
* `unified_type1`, `unified_type2`, `unified_pe`, `unified_array` — the
  unified datapath;
* `polar_encoder`, `early_stop` — the early-stopping test;
* `sc_leaf4`, `sc_psum` — the SC leaf decoder and partial sums;
* `hybrid_ctrl` — the FSM;
* `hybrid_polar_decoder` — the top.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`, plus:

* `tb_ref_pkg.sv` — integer reference models;
* `tb_common.svh` — counters, clock and watchdog;
* `tb_frame_task.svh` — frame stimulus for the end-to-end tests.

The reference models are:

* min-sum arithmetic;
* a bit-by-bit SC decoder;
* a BP decoder with the hardware's stage schedule and early stopping;
* x = uG from the matrix definition;
* code construction;
* a BPSK/AWGN channel with 2 fractional LLR bits.

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog. What they cover:

* unit tests are exhaustive for the converters and random for the blocks;
* `tb_hybrid_ctrl` checks the stage enables in every cycle, and the SC step
  sequence against a depth-first walk of the tree;
* `tb_hybrid_polar_decoder` (N = 64) runs 36 frames in all three modes.
  Each frame's decoded bits must match the reference bit for bit, and the
  latency must match the formulas. It counts early stops, SC fallbacks,
  BP-only failures and SC-only frames, and fails if any of them never
  occurred;
* none of them runs the default size. At N = 1024 the design passes lint and
  elaboration, but building its Verilator model took more than a quarter of
  an hour of C++ compilation on a 4-core machine. No testbench at that size
  was kept. The largest size simulated end to end is N = 256 (K = 128,
  12 frames covering early stop, SC fallback, BP-only failure and SC-only
  mode, 3120 checks, 0 failures), using the same testbench with N, K and M
  changed; its model took about 8 minutes to build. The kept end-to-end
  testbench runs N = 64.

To simulate a testbench with Verilator, from the directory that holds
`rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/polar_pkg.sv tb/tb_ref_pkg.sv \
    $(ls rtl/*.sv | grep -v polar_pkg) tb/tb_hybrid_polar_decoder.sv \
    --top-module tb_hybrid_polar_decoder -j 8
./obj_dir/Vtb_hybrid_polar_decoder
```

Other sizes come from the `N` parameter (a power of two, at least 8). The
word length is `MAGW` in `polar_pkg`, and the scaling factor is in
`scale_unit`. The reference model in `tb_ref_pkg` hard-codes ±63 and 15/16;
change it together with the RTL.
