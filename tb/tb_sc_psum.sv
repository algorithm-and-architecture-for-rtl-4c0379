// tb_sc_psum: feeds the leaf writes of a whole frame (random bits) in SC order
// and checks, after every leaf, that each stored column equals the encoding of
// the already-decoded bits of the rows it covers (independent reference: the
// matrix encoder applied to each finished node).
module tb_sc_psum;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  localparam int N  = 64;
  localparam int M  = 6;
  localparam int PW = M - 3;
  logic clear, wr_f, wr_g;
  logic [PW-1:0] leaf_p;
  logic [3:0] enc;
  logic [N-1:0] ps_col [1:M];
  bit u[], sub[], xs[];
  int done_bits, sz, base;
  sc_psum #(.N(N)) dut (.clk, .clear, .wr_f, .wr_g, .leaf_p, .enc, .ps_col);

  function automatic logic [3:0] enc4(input bit b0, bit b1, bit b2, bit b3);
    bit t[], x[];
    t = new[4];
    t[0] = b0; t[1] = b1; t[2] = b2; t[3] = b3;
    encode(t, x);
    return {x[3], x[2], x[1], x[0]};
  endfunction

  initial begin
    u = new[N];
    for (int i = 0; i < N; i++) u[i] = 1'($urandom_range(1));
    clear = 1'b1; wr_f = 1'b0; wr_g = 1'b0; leaf_p = '0; enc = '0;
    @(negedge clk);
    clear = 1'b0;
    for (int p = 0; p < N / 8; p++) begin
      leaf_p = PW'(p);
      wr_f = 1'b1;
      enc = enc4(u[8*p], u[8*p+1], u[8*p+2], u[8*p+3]);
      @(negedge clk);
      wr_f = 1'b0;
      wr_g = 1'b1;
      enc = enc4(u[8*p+4], u[8*p+5], u[8*p+6], u[8*p+7]);
      @(negedge clk);
      wr_g = 1'b0;
      done_bits = 8 * (p + 1);
      // column j holds the encoding of every finished stage-(j-1) node
      for (int j = 3; j <= M; j++) begin
        sz = 1 << (j - 1);
        for (int nd = 0; nd < done_bits / sz; nd++) begin
          base = nd * sz;
          sub = new[sz];
          for (int r = 0; r < sz; r++) sub[r] = u[base + r];
          encode(sub, xs);
          for (int r = 0; r < sz; r++)
            check(ps_col[j][base + r] == xs[r], $sformatf("leaf %0d col %0d row %0d", p, j, base + r));
        end
      end
    end
    finish_tb();
  end
endmodule
