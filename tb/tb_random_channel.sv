// tb_random_channel: one CeMux adder with M random weights (precision N), driven with
// R frames of random input values. Used by tb_workload_random_weights.
//
// The target of every frame is the exact weighted sum of eq. "z = sum w_i mu_i /
// sum |w_i|" with the unquantised random weights and the (N-bit) input values. The
// root-mean-square error over the R frames, multiplied by sqrt(2^N), is reported on
// nrmse when finished rises.
module tb_random_channel #(
  parameter int M    = 8,
  parameter int N    = 10,
  parameter int R    = 100,
  parameter int SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output real  nrmse
);
  import cemux_pkg::*;
  localparam mag_vec_t A   = cemux_ref_pkg::rand_mags(M, SEED);
  localparam q_vec_t   Q   = quantize(A, M, N);
  localparam neg_vec_t NEG = cemux_ref_pkg::rand_neg(M, SEED);

  logic start = 0, busy, done;
  logic [M-1:0][N-1:0] p;
  logic signed [N+1:0] est;

  cemux_adder #(.N(N), .M(M), .Q(Q), .NEG(NEG)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .p(p),
    .busy(busy), .done(done), .estimate(est));

  initial begin
    real sq, wsum, tgt, e;
    finished = 0;
    nrmse = 0.0;
    sq = 0.0;
    wsum = 0.0;
    for (int i = 0; i < M; i++) wsum += real'(A[i]);
    @(posedge rst_n);
    @(negedge clk);
    for (int f = 0; f < R; f++) begin
      for (int i = 0; i < M; i++) p[i] = N'($urandom);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      tgt = 0.0;
      for (int i = 0; i < M; i++)
        tgt += (NEG[i] ? -1.0 : 1.0) * real'(A[i]) / wsum
               * (2.0 * real'(p[i]) / real'(1 << N) - 1.0);
      e = real'(est) / real'(1 << N) - tgt;
      sq += e * e;
    end
    nrmse = $sqrt(sq / R) * $sqrt(real'(1 << N));
    finished = 1;
  end
endmodule
