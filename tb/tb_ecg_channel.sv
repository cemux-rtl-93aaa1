// tb_ecg_channel: one CeMux FIR filter (M taps, precision N, default lowpass taps)
// filtering the deterministic ECG-like waveform of cemux_ref_pkg. Used by
// tb_workload_ecg.
//
// Samples are offered back to back. After the first M outputs (the line is then full
// of real samples) every output is compared with the ideal real-valued filter on the
// same quantised samples, normalised by sum |h|; the RMS error over OUTS outputs is
// reported on rmse when finished rises.
module tb_ecg_channel #(
  parameter int M    = 100,
  parameter int N    = 10,
  parameter int OUTS = 150
) (
  input  logic clk,
  input  logic rst_n,
  output logic finished,
  output real  rmse
);
  logic in_valid, in_ready, out_valid;
  logic [N-1:0] in_sample;
  logic signed [N+1:0] out_estimate;

  cemux_fir #(.N(N), .M(M)) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .in_sample(in_sample), .out_valid(out_valid), .out_estimate(out_estimate));

  real h [M];
  real xs [M + OUTS];

  initial begin
    real hsum, sq, ideal, e;
    int  sp;
    finished = 0;
    rmse = 0.0;
    in_valid = 0;
    in_sample = '0;
    hsum = 0.0;
    for (int k = 0; k < M; k++) begin
      h[k] = cemux_ref_pkg::ideal_tap(k, M);
      hsum += (h[k] < 0.0) ? -h[k] : h[k];
    end
    sq = 0.0;
    @(posedge rst_n);
    @(negedge clk);
    for (int s = 0; s < M + OUTS; s++) begin
      sp = int'((cemux_ref_pkg::ecg_signal(s) + 1.0) / 2.0 * (1 << N));
      if (sp < 0) sp = 0;
      if (sp > (1 << N) - 1) sp = (1 << N) - 1;
      xs[s] = 2.0 * real'(sp) / real'(1 << N) - 1.0;
      in_sample = N'(sp);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) @(negedge clk);
      if (s >= M) begin
        ideal = 0.0;
        for (int k = 0; k < M; k++) ideal += h[k] * xs[s - k];
        e = real'(out_estimate) / real'(1 << N) - ideal / hsum;
        sq += e * e;
      end
    end
    rmse = $sqrt(sq / OUTS);
    finished = 1;
  end
endmodule
