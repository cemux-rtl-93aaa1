// cemux_adder: CeMux, a correlation-enhanced stochastic multiplexer adder.
//
// It computes the bipolar weighted sum
//     z = sum_i w_i * mu_i / sum_i |w_i|,   mu_i = 2 p_i / 2^N - 1 in [-1, 1),
// for M inputs with fixed weights, by stochastic computing over one frame of 2^N
// clock cycles. Datapath, per cycle:
//   r  = bit-reversed counter (Sobol low-discrepancy source)      cemux_sobol_rns
//   x_i = (r < p_i), or (~r < p_i) for negative weights            cemux_pcc_array
//   y_i = x_i, or ~x_i for negative weights                        cemux_sign_inverter_array
//   z   = y of the input owning tree slot s, s = sampler counter   cemux_hw_mux_tree
//   count += z ? +1 : -1                                           cemux_output_estimator
// The two counters start together from 0 and advance together, so during one frame the
// sampler visits each tree slot exactly once (precise sampling) and all y_i are
// maximally correlated (full correlation). At the end of the frame, estimate / 2^N is
// the weighted sum; with the low-discrepancy source its error is close to the
// quantisation limit. All of this follows the original design.
// This implementation's choices: the start/busy/done frame protocol, restarting both
// counters from 0 at every frame, and the estimator width (see cemux_output_estimator).
//
// Parameters: N (precision; streams are 2^N bits), M (inputs), Q (quantised weight
// magnitudes, q_i / 2^N, summing to 2^N), NEG (bit i = 1 for a negative weight).
// Defaults are the 100-tap, 10-bit ECG lowpass filter of cemux_pkg.
//
// Protocol and timing: p must be held stable while busy. A start pulse while idle
// clears the estimator and counters; busy is then high for exactly 2^N cycles, one
// stream bit per cycle. done pulses for one cycle in the cycle after the last bit,
// 2^N + 1 cycles after start, and estimate holds its value from then until the next
// start. A start while busy is ignored.
module cemux_adder #(
  parameter int unsigned         N   = cemux_pkg::DEFAULT_N,
  parameter int unsigned         M   = cemux_pkg::DEFAULT_M,
  parameter cemux_pkg::q_vec_t   Q   = cemux_pkg::ecg_q(M, N),
  parameter cemux_pkg::neg_vec_t NEG = cemux_pkg::ecg_neg(M)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [M-1:0][N-1:0] p,
  output logic                busy,
  output logic                done,
  output logic signed [N+1:0] estimate
);

  logic         clear, run, last;
  logic [N-1:0] r, sel;
  logic [M-1:0] x, y;
  logic         z;

  assign clear = start && !busy;
  assign run   = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= busy && last;
      if (clear)             busy <= 1'b1;
      else if (busy && last) busy <= 1'b0;
    end
  end

  cemux_sobol_rns #(.N(N)) u_rns (
    .clk(clk), .rst_n(rst_n), .clear(clear), .en(run), .r(r)
  );

  cemux_pcc_array #(.N(N), .M(M), .NEG(NEG)) u_pcc (
    .r(r), .p(p), .x(x)
  );

  cemux_sign_inverter_array #(.M(M), .NEG(NEG)) u_sign (
    .x(x), .y(y)
  );

  cemux_precise_sampler #(.N(N)) u_sampler (
    .clk(clk), .rst_n(rst_n), .clear(clear), .en(run), .sel(sel), .last(last)
  );

  cemux_hw_mux_tree #(.N(N), .M(M), .Q(Q)) u_tree (
    .y(y), .sel(sel), .z(z)
  );

  cemux_output_estimator #(.N(N)) u_est (
    .clk(clk), .rst_n(rst_n), .clear(clear), .en(run), .z(z), .count(estimate)
  );

  // The two counters must stay in step for precise sampling to hold: the data RNS
  // value is always the bit reversal of the select word.
  logic [N-1:0] sel_rev;
  always_comb begin
    for (int i = 0; i < N; i++) sel_rev[i] = sel[N-1-i];
  end

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (r == sel_rev));

endmodule
