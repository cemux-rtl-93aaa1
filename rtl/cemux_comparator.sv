// cemux_comparator: one probability conversion circuit (PCC) of CeMux.
//
// A plain N-bit magnitude comparator, x = (r < p). With r running through a
// permutation of [0, 2^N - 1], x is 1 for exactly p of the 2^N cycles, so x is a
// stochastic bit-stream of probability p / 2^N. Purely combinational.
module cemux_comparator #(
  parameter int unsigned N = cemux_pkg::DEFAULT_N
) (
  input  logic [N-1:0] r,
  input  logic [N-1:0] p,
  output logic         x
);

  assign x = (r < p);

endmodule
