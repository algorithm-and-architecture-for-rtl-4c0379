// comp_select: magnitude comparator and selector ("Comp & Select" in the
// unified blocks). Combinational: min_o = min(a, b), the min() of the min-sum
// approximation used by both the SC f/g functions and the BP updates.
module comp_select
  import polar_pkg::*;
(
  input  logic [MAGW-1:0] a,
  input  logic [MAGW-1:0] b,
  output logic [MAGW-1:0] min_o
);
  assign min_o = (a < b) ? a : b;
endmodule
