// tb_scale_unit: exhaustive test of the 15/16 scaling, against floor(15m/16).
module tb_scale_unit;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  logic [MAGW-1:0] mag_i, mag_o;
  scale_unit dut (.mag_i, .mag_o);
  initial begin
    for (int m = 0; m < 64; m++) begin
      mag_i = MAGW'(m);
      #1;
      check(int'(mag_o) == m - (m / 16), $sformatf("scale(%0d)=%0d", m, mag_o));
    end
    finish_tb();
  end
endmodule
