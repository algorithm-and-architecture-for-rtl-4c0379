// sc_psum: partial-sum memory of the SC decoder.
//
// ps_col[j] holds, for every row, the hard value of the u-side node of column
// j of the factor graph that the SC decoder has already settled; the g step of
// a stage-j node reads the upper half of its rows. Columns 3..M are stored.
// Updates happen at the two leaf cycles of an 8-bit leaf p (rows 8p..8p+7):
//   wr_f: column 3, rows 8p..8p+3   <- enc (partial sums of bits 0..3)
//   wr_g: column 3, rows 8p+4..8p+7 <- enc (partial sums of bits 4..7), and
//         the finished leaf is encoded upwards: for each stage j >= 3 whose
//         node the leaf completes (all lower bits of p set), column j+1 of that
//         node gets (upper ^ lower, lower) of column j.
// The whole upward chain settles in the same cycle (an XOR chain of depth
// M-3). clear zeroes the memory at the start of a frame. The registers and the
// single-cycle upward encoding are this design's choices.
module sc_psum #(
  parameter int N = 1024,
  localparam int M  = $clog2(N),
  localparam int PW = (M > 3) ? M - 3 : 1
) (
  input  logic          clk,
  input  logic          clear,
  input  logic          wr_f,
  input  logic          wr_g,
  input  logic [PW-1:0] leaf_p,
  input  logic [3:0]    enc,
  output logic [N-1:0]  ps_col [1:M]
);
  logic [N-1:0] ps_q [3:M];
  logic [N-1:0] ps_n [3:M];

  always_comb begin
    for (int c = 3; c <= M; c++) ps_n[c] = ps_q[c];
    if (wr_f || wr_g) begin
      for (int q = 0; q < 4; q++) ps_n[3][8 * int'(leaf_p) + (wr_g ? 4 : 0) + q] = enc[q];
    end
    if (wr_g) begin
      for (int j = 3; j < M; j++) begin
        if ((int'(leaf_p) & ((1 << (j - 3)) - 1)) == ((1 << (j - 3)) - 1)) begin
          for (int r = 0; r < N; r++) begin
            if ((r >> j) == (int'(leaf_p) >> (j - 3))) begin
              if ((r & (1 << (j - 1))) == 0) ps_n[j+1][r] = ps_n[j][r] ^ ps_n[j][r | (1 << (j - 1))];
              else                           ps_n[j+1][r] = ps_n[j][r];
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int c = 3; c <= M; c++) ps_q[c] <= clear ? '0 : ps_n[c];
  end

  always_comb begin
    ps_col[1] = '0;
    ps_col[2] = '0;
    for (int c = 3; c <= M; c++) ps_col[c] = ps_q[c];
  end
endmodule
