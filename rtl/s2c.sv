// s2c: sign-magnitude to two's-complement converter ("S2C" in the unified
// Type-I and Type-II blocks). Purely combinational: y = x.sgn ? -x.mag : x.mag,
// widened to polar_pkg::TCW bits so that two results can be added without
// overflow. The conversion itself is this design's plain rendering of the named
// block.
module s2c
  import polar_pkg::*;
(
  input  llr_t x,
  output tc_t  y
);
  tc_t m;
  assign m = tc_t'({2'b00, x.mag});
  assign y = x.sgn ? -m : m;
endmodule
