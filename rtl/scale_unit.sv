// scale_unit: min-sum scaling ("Scale unit" in the unified blocks).
// Combinational: mag_o = mag_i - (mag_i >> 4), i.e. multiplication by the
// scaling factor s = 0.9375 with truncation, done with one shift and one
// subtraction. The value of s is this design's choice; the architecture only
// names a scale unit and a factor s for the BP updates.
module scale_unit
  import polar_pkg::*;
(
  input  logic [MAGW-1:0] mag_i,
  output logic [MAGW-1:0] mag_o
);
  assign mag_o = mag_i - (mag_i >> 4);
endmodule
