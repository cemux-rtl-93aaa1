// cemux_sobol_rns: the data random number source (RNS) of CeMux.
//
// It produces the first dimension of the Sobol low-discrepancy sequence, which for a
// power-of-two length is the van der Corput sequence: the bit-reversed state of an
// ordinary N-bit up counter. Over any 2^N consecutive enabled cycles starting from the
// cleared state, r takes every value in [0, 2^N - 1] exactly once, and the values of
// any aligned run of 2^k cycles are spread evenly over the range. That evenness is what
// gives the comparators downstream low-discrepancy bit-streams.
// Using a bit-reversed counter follows the original design; the clear input and the
// reset value 0 are this implementation's choices.
//
// Interface: clk, rst_n (asynchronous, active low), clear (synchronous return to state
// 0, has priority over en), en (advance one step). r is a function of the register
// state only, so it changes one cycle after an enabled edge.
module cemux_sobol_rns #(
  parameter int unsigned N = cemux_pkg::DEFAULT_N
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         en,
  output logic [N-1:0] r
);

  logic [N-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      cnt_q <= '0;
    else if (clear)  cnt_q <= '0;
    else if (en)     cnt_q <= cnt_q + 1'b1;
  end

  // Reverse the bit order of the counter state.
  always_comb begin
    for (int i = 0; i < N; i++) r[i] = cnt_q[N-1-i];
  end

endmodule
