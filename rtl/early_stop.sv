// early_stop: early stopping detector of the BP phase.
//
// At the end of a BP iteration the hard decisions of the soft u estimate
// (u_hard, frozen rows already 0) are re-encoded with x = uG and compared with
// the hard decisions of the soft x estimate (x_hard). Equality means the BP
// decoder holds a valid codeword consistent with its own u estimate, and
// 'valid' goes high. Combinational; the controller samples it once per
// iteration. The decision rule (re-encode and compare, sometimes called the
// G-matrix criterion) is this design's choice among published early stopping
// criteria for polar BP decoders.
module early_stop #(
  parameter int N = 1024
) (
  input  logic [N-1:0] u_hard,
  input  logic [N-1:0] x_hard,
  output logic         valid
);
  logic [N-1:0] x_re;

  polar_encoder #(.N(N)) u_enc (.u(u_hard), .x(x_re));
  assign valid = (x_re == x_hard);
endmodule
