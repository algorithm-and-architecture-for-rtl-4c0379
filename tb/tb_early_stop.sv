// tb_early_stop: valid is 1 exactly when x_hard equals the re-encoded u_hard.
module tb_early_stop;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  localparam int N = 32;
  logic [N-1:0] u_hard, x_hard;
  logic valid;
  bit ub[], xb[];
  int e;
  early_stop #(.N(N)) dut (.u_hard, .x_hard, .valid);
  initial begin
    ub = new[N];
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < N; i++) begin
        ub[i] = 1'($urandom_range(1));
        u_hard[i] = ub[i];
      end
      encode(ub, xb);
      for (int i = 0; i < N; i++) x_hard[i] = xb[i];
      e = (n % 2 == 1) ? int'($urandom_range(N - 1)) : -1;
      if (e >= 0) x_hard[e] = ~x_hard[e];
      #1;
      check(valid == (e < 0), $sformatf("valid=%0d flipped=%0d", valid, e));
    end
    finish_tb();
  end
endmodule
