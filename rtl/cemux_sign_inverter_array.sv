// cemux_sign_inverter_array: the sign multiplier array of CeMux.
//
// In bipolar stochastic format (value = 2 P(1) - 1), inverting a stream negates its
// value. Multiplying input i by the sign of its weight therefore takes an inverter on
// every stream whose weight is negative and a plain wire elsewhere; this is the XNOR
// array of a conventional mux adder with the constant sign operand folded in. The sign
// pattern is the elaboration parameter NEG (bit i = 1: weight i negative), as in the
// original design where weights are fixed. Purely combinational.
module cemux_sign_inverter_array #(
  parameter int unsigned         M   = cemux_pkg::DEFAULT_M,
  parameter cemux_pkg::neg_vec_t NEG = cemux_pkg::ecg_neg(M)
) (
  input  logic [M-1:0] x,
  output logic [M-1:0] y
);

  assign y = x ^ NEG[M-1:0];

endmodule
