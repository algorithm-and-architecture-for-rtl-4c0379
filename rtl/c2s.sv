// c2s: two's-complement to sign-magnitude converter ("C2S" in the unified
// blocks). Combinational. The magnitude saturates at polar_pkg::MAG_MAX when the
// adder result does not fit, which this design chose; a zero result is positive.
module c2s
  import polar_pkg::*;
(
  input  tc_t  y,
  output llr_t x
);
  logic [TCW-1:0] a;
  assign a     = y[TCW-1] ? -y : y;
  assign x.sgn = y[TCW-1];
  assign x.mag = (a > TCW'(MAG_MAX)) ? MAG_MAX : a[MAGW-1:0];
endmodule
