// cemux_pcc_array: the probability conversion circuit array of CeMux, including the
// N "correlation inverters".
//
// Every input i has its own N-bit comparator x_i = (R_i < p_i), and all comparators
// share one random number source r. Inputs whose weight is positive compare against r
// itself; inputs whose weight is negative compare against the bitwise inverse ~r,
// produced once by N inverters and shared. Since the negative-weight streams are later
// inverted again (cemux_sign_inverter_array), using ~r for them makes every stream that
// enters the mux tree maximally positively correlated with every other (SCC = +1,
// "full correlation"), which lowers the variance of the mux output. This structure
// follows the original design; which inputs are negative is fixed at elaboration by
// the NEG parameter (bit i = 1 means weight i is negative).
//
// Interface: r is the shared RNS value, p packs the M input probabilities
// (p[i] / 2^N = P(x_i = 1)). Purely combinational.
module cemux_pcc_array #(
  parameter int unsigned         N   = cemux_pkg::DEFAULT_N,
  parameter int unsigned         M   = cemux_pkg::DEFAULT_M,
  parameter cemux_pkg::neg_vec_t NEG = cemux_pkg::ecg_neg(M)
) (
  input  logic [N-1:0]         r,
  input  logic [M-1:0][N-1:0]  p,
  output logic [M-1:0]         x
);

  // The shared correlation inverters.
  logic [N-1:0] r_inv;
  assign r_inv = ~r;

  for (genvar i = 0; i < M; i++) begin : g_pcc
    if (NEG[i]) begin : g_neg
      cemux_comparator #(.N(N)) u_cmp (.r(r_inv), .p(p[i]), .x(x[i]));
    end else begin : g_pos
      cemux_comparator #(.N(N)) u_cmp (.r(r),     .p(p[i]), .x(x[i]));
    end
  end

endmodule
