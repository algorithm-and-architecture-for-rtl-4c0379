// tb_polar_encoder: the n = 8 example (u = 01000010 -> x = 01101010, bits
// listed from index 0) and random vectors at n = 64 against the matrix
// definition of G.
module tb_polar_encoder;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  logic [7:0]  u8, x8;
  logic [63:0] u64, x64;
  bit ub[], xb[];
  polar_encoder #(.N(8))  dut8  (.u(u8),  .x(x8));
  polar_encoder #(.N(64)) dut64 (.u(u64), .x(x64));
  initial begin
    // index 0 is the leftmost bit of the written vector
    u8 = 8'b0100_0010;
    u8 = {<<{u8}};
    #1;
    check({<<{x8}} == 8'b0110_1010, $sformatf("example x=%b", {<<{x8}}));
    ub = new[64];
    for (int n = 0; n < 300; n++) begin
      for (int i = 0; i < 64; i++) begin
        ub[i] = (n < 64) ? (i == n) : 1'($urandom_range(1));
        u64[i] = ub[i];
      end
      #1;
      encode(ub, xb);
      for (int i = 0; i < 64; i++) check(x64[i] == xb[i], $sformatf("x[%0d] vector %0d", i, n));
    end
    finish_tb();
  end
endmodule
