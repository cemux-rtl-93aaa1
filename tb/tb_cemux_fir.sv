// tb_cemux_fir: end-to-end test of the stochastic FIR filter at its default size
// (100 taps, 10-bit precision, 1024-bit streams), no parameter overrides.
//
// Input: a synthetic ECG-like waveform (a periodic sharp QRS-like spike on a slow
// baseline wander) plus uniform random noise, quantised to 10-bit probabilities. It is
// offered with random idle gaps, and often already while a frame is still running, so
// the valid/ready stall is exercised.
// Checks per output: the estimate equals the bit-exact reference count computed from
// a model of the tap line; out_valid comes 2^N + 1 cycles after the sample is taken;
// nothing is taken while in_ready is low. At the end the RMS error of
// estimate / 2^N against the ideal real-valued filter (unquantised coefficients,
// normalised by sum |h|) must stay below 2^-7, and each mechanism (stall, frame,
// negative-weight taps, negative and positive outputs) must have occurred.
module tb_cemux_fir;
  import cemux_pkg::*;
  localparam int N = DEFAULT_N, M = DEFAULT_M;
  localparam int SAMPLES = 300;
  localparam q_vec_t   Q   = ecg_q(M, N);
  localparam neg_vec_t NEG = ecg_neg(M);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid;
  logic [N-1:0] in_sample = 0;
  logic signed [N+1:0] out_estimate;
  int checks = 0, failures = 0;

  cemux_fir dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready),
    .in_sample(in_sample), .out_valid(out_valid), .out_estimate(out_estimate));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Tap model and ideal filter.
  logic [M-1:0][N-1:0] taps;
  real h [M];
  real hsum;
  int stalls = 0, frames = 0, neg_outputs = 0, pos_outputs = 0, neg_taps = 0;
  real sq_err = 0.0;
  int  n_err = 0;
  int  sp_arr [SAMPLES + 1];

  function automatic real signal(int t);
    real phase, v;
    phase = real'(t % 90) / 90.0;
    v = 0.15 * $sin(2.0 * 3.141592653589793 * t / 300.0);            // baseline wander
    if (phase > 0.45 && phase < 0.55) v += 0.7 * (1.0 - 20.0 * ((phase > 0.5) ? phase - 0.5 : 0.5 - phase));
    if (phase > 0.70 && phase < 0.85) v += 0.2 * $sin(3.141592653589793 * (phase - 0.70) / 0.15);
    v += 0.2 * (real'($urandom_range(0, 1000)) / 1000.0 - 0.5);        // noise
    return v - 0.1;
  endfunction

  initial begin
    real x;
    for (int k = 0; k < M; k++) begin
      real xx;
      xx = k - (M - 1) / 2.0;
      h[k] = $sin(0.1 * 3.141592653589793 * xx) / (3.141592653589793 * xx)
             * (0.54 - 0.46 * $cos(2.0 * 3.141592653589793 * k / (M - 1)));
    end
    hsum = 0.0;
    for (int k = 0; k < M; k++) begin
      hsum += (h[k] < 0.0) ? -h[k] : h[k];
      if (NEG[k]) neg_taps++;
    end
    for (int k = 0; k < M; k++) taps[k] = N'(1 << (N - 1));

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int s = 0; s <= SAMPLES; s++) begin
      x = signal(s);
      sp_arr[s] = int'((x + 1.0) / 2.0 * (1 << N));
      if (sp_arr[s] < 0) sp_arr[s] = 0;
      if (sp_arr[s] > (1 << N) - 1) sp_arr[s] = (1 << N) - 1;
    end
    for (int s = 0; s < SAMPLES; s++) begin
      int cyc, expv, sp, early;
      real ideal, est;
      sp = sp_arr[s];
      // random gap unless the sample is already being offered
      if (!in_valid) begin
        repeat ($urandom_range(0, 3)) @(negedge clk);
        in_sample = N'(sp);
        in_valid = 1;
      end
      while (!in_ready) begin
        @(negedge clk);
      end
      // taken at the next rising edge
      @(negedge clk);
      in_valid = 0;
      check(!in_ready, "frame starts when a sample is taken");
      for (int k = M - 1; k > 0; k--) taps[k] = taps[k-1];
      taps[0] = N'(sp);
      cyc = 1;
      // Half of the time the next sample is offered in the middle of the frame; it
      // must wait (stall) until the frame ends.
      early = (s + 1 < SAMPLES) ? $urandom_range(0, 1) : 0;
      while (!out_valid && cyc < 4000) begin
        check(!in_ready, "in_ready low during frame");
        if (early != 0 && cyc == 500) begin
          in_sample = N'(sp_arr[s+1]);
          in_valid = 1;
        end
        if (in_valid && !in_ready) stalls++;
        @(negedge clk);
        cyc++;
      end
      frames++;
      check(cyc == (1 << N) + 1, $sformatf("sample %0d latency %0d", s, cyc));
      expv = cemux_ref_pkg::frame_estimate(Q, NEG, M, N, (MAX_M*MAX_N)'(taps));
      check(int'(out_estimate) == expv, $sformatf("sample %0d: %0d vs %0d", s, out_estimate, expv));
      if (out_estimate < 0) neg_outputs++; else pos_outputs++;
      ideal = 0.0;
      for (int k = 0; k < M; k++)
        ideal += h[k] * (2.0 * real'(taps[k]) / real'(1 << N) - 1.0);
      ideal = ideal / hsum;
      est = real'(out_estimate) / real'(1 << N);
      if (s >= M) begin
        sq_err += (est - ideal) * (est - ideal);
        n_err++;
      end
    end
    begin
      real rmse;
      rmse = $sqrt(sq_err / n_err);
      $display("RMSE vs ideal filter over %0d outputs: %f (2^-7 = %f)", n_err, rmse, 1.0 / 128.0);
      check(rmse < 1.0 / 128.0, "RMSE below 2^-7");
    end
    $display("mechanisms: frames=%0d stall_cycles=%0d negative_weight_taps=%0d negative_outputs=%0d positive_outputs=%0d",
             frames, stalls, neg_taps, neg_outputs, pos_outputs);
    check(frames == SAMPLES, "all frames completed");
    check(stalls > 0, "stall never happened");
    check(neg_taps > 0, "no negative-weight taps (full-correlation inverters unused)");
    check(neg_outputs > 0 && pos_outputs > 0, "output sign never changed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (SAMPLES * 1200 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
