// cemux_fir: an M-tap stochastic FIR filter built on the CeMux adder.
//
// The filter computes Z_i = sum_k h_k X_{i-k} / sum_k |h_k| for a stream of input
// samples, the scaled FIR sum being exactly the weighted addition that CeMux performs.
// A new sample enters the tap delay line and, in the same clock edge, a CeMux frame of
// 2^N cycles starts on the updated taps; at its end the up-down count is presented as
// the filtered output. The coefficients are fixed at elaboration and hardwired into
// the comparator array (signs) and the mux tree (magnitudes).
// The defaults are those of the original ECG case study: N = 10 (1024-bit streams) and
// M = 100 taps of a lowpass filter with cutoff 0.1*pi rad/sample. The tap values
// themselves are this implementation's (a Hamming-windowed sinc, see cemux_pkg), as are
// the valid/ready sample interface and the output register.
//
// Number formats: in_sample is an unsigned N-bit probability s, bipolar value
// 2 s / 2^N - 1. out_estimate is two's complement with N fractional bits: the filter
// output is out_estimate / 2^N times sum_k |h_k|.
//
// Timing: in_ready is high while no frame runs; a sample is taken on a clock edge with
// in_valid && in_ready. out_valid pulses 2^N + 1 cycles later with out_estimate, which
// holds until the next result. A sample offered while a frame runs waits (in_ready
// low). At the 360 samples/s of the ECG case study this needs a clock of at least
// 360 * (2^N + 1) Hz, about 369 kHz for N = 10.
module cemux_fir #(
  parameter int unsigned         N   = cemux_pkg::DEFAULT_N,
  parameter int unsigned         M   = cemux_pkg::DEFAULT_M,
  parameter cemux_pkg::q_vec_t   Q   = cemux_pkg::ecg_q(M, N),
  parameter cemux_pkg::neg_vec_t NEG = cemux_pkg::ecg_neg(M)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [N-1:0]        in_sample,
  output logic                out_valid,
  output logic signed [N+1:0] out_estimate
);

  logic                busy, done, take;
  logic [M-1:0][N-1:0] taps;

  assign in_ready  = !busy;
  assign take      = in_valid && in_ready;
  assign out_valid = done;

  cemux_delay_line #(.N(N), .M(M)) u_taps (
    .clk(clk), .rst_n(rst_n), .shift(take), .din(in_sample), .taps(taps)
  );

  cemux_adder #(.N(N), .M(M), .Q(Q), .NEG(NEG)) u_cemux (
    .clk(clk), .rst_n(rst_n), .start(take), .p(taps),
    .busy(busy), .done(done), .estimate(out_estimate)
  );

endmodule
