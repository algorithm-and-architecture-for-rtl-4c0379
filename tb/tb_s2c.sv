// tb_s2c: exhaustive test of the sign-magnitude to two's-complement converter.
module tb_s2c;
  import polar_pkg::*;
  import tb_ref_pkg::*;
`include "tb_common.svh"
  llr_t x;
  tc_t  y;
  s2c dut (.x, .y);
  initial begin
    for (int s = 0; s < 2; s++)
      for (int m = 0; m < 64; m++) begin
        x = '{sgn: s[0], mag: MAGW'(m)};
        #1;
        check(int'(y) == (s ? -m : m), $sformatf("s2c sgn=%0d mag=%0d -> %0d", s, m, y));
      end
    finish_tb();
  end
endmodule
