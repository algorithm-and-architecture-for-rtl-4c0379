// tb_comp_select: exhaustive test of the minimum selector.
module tb_comp_select;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  logic [MAGW-1:0] a, b, min_o;
  comp_select dut (.a, .b, .min_o);
  initial begin
    for (int i = 0; i < 64; i++)
      for (int j = 0; j < 64; j++) begin
        a = MAGW'(i);
        b = MAGW'(j);
        #1;
        check(int'(min_o) == ((i < j) ? i : j), $sformatf("min(%0d,%0d)=%0d", i, j, min_o));
      end
    finish_tb();
  end
endmodule
