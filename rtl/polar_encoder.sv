// polar_encoder: x = uG over GF(2) for an N-bit polar code.
//
// G is the M-fold Kronecker power of F = [1 0; 1 1] (lower triangular, natural
// bit order), so x[c] is the XOR of all u[r] whose index r contains every 1-bit
// of c. It is built as M butterfly stages of N/2 XOR gates; stage j replaces
// v[i] by v[i] ^ v[i+s] for each row i whose bit s = 2^(j-1) is clear.
// Combinational. Used by the early-stop detector to re-encode the hard
// decisions of u. The matrix follows the encoding example of the architecture;
// the butterfly realisation is this design's.
module polar_encoder #(
  parameter int N = 1024,
  localparam int M = $clog2(N)
) (
  input  logic [N-1:0] u,
  output logic [N-1:0] x
);
  logic [N-1:0] v [M+1];

  assign v[0] = u;
  for (genvar j = 0; j < M; j++) begin : g_st
    for (genvar i = 0; i < N; i++) begin : g_row
      if ((i & (1 << j)) == 0) begin : g_up
        assign v[j+1][i] = v[j][i] ^ v[j][i + (1 << j)];
      end else begin : g_lo
        assign v[j+1][i] = v[j][i];
      end
    end
  end
  assign x = v[M];
endmodule
