// tb_cemux_adder: checks complete CeMux adders frame by frame.
//   small: N = 6, M = 5, weights 20/64, -17/64, 13/64, -9/64, 5/64;
//   full:  the default 100-input, 10-bit lowpass configuration.
// Every frame uses fresh random input probabilities. The estimate must equal the
// bit-exact reference count (cemux_ref_pkg::frame_estimate), done must come exactly
// 2^N + 1 cycles after start, busy must last 2^N cycles, a start during a frame must be
// ignored, and estimate / 2^N must be close to the real weighted sum
// sum_i sign_i (q_i / 2^N) (2 p_i / 2^N - 1).
module tb_cemux_adder;
  import cemux_pkg::*;
  localparam int NS = 6, MS = 5;
  localparam int NF = DEFAULT_N, MF = DEFAULT_M;

  function automatic q_vec_t mk_q();
    q_vec_t q;
    q = '0;
    q[0] = 17'd20; q[1] = 17'd17; q[2] = 17'd13; q[3] = 17'd9; q[4] = 17'd5;
    return q;
  endfunction
  localparam q_vec_t   QS = mk_q();
  localparam neg_vec_t NS_NEG = neg_vec_t'(5'b01010);
  localparam q_vec_t   QF = ecg_q(MF, NF);
  localparam neg_vec_t NF_NEG = ecg_neg(MF);

  logic clk = 0, rst_n = 0;
  logic start_s = 0, start_f = 0;
  logic [MS-1:0][NS-1:0] p_s;
  logic [MF-1:0][NF-1:0] p_f;
  logic busy_s, done_s, busy_f, done_f;
  logic signed [NS+1:0] est_s;
  logic signed [NF+1:0] est_f;
  int checks = 0, failures = 0;
  real max_err_s = 0.0, max_err_f = 0.0;

  cemux_adder #(.N(NS), .M(MS), .Q(QS), .NEG(NS_NEG)) dut_s (
    .clk(clk), .rst_n(rst_n), .start(start_s), .p(p_s),
    .busy(busy_s), .done(done_s), .estimate(est_s));

  cemux_adder dut_f (
    .clk(clk), .rst_n(rst_n), .start(start_f), .p(p_f),
    .busy(busy_f), .done(done_f), .estimate(est_f));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real target(q_vec_t q, neg_vec_t neg, int m, int n,
                                 logic [MAX_M*MAX_N-1:0] p);
    real s, mu;
    s = 0.0;
    for (int i = 0; i < m; i++) begin
      mu = 2.0 * real'((p >> (i * n)) & ((1 << n) - 1)) / real'(1 << n) - 1.0;
      s += (neg[i] ? -1.0 : 1.0) * real'(q[i]) / real'(1 << n) * mu;
    end
    return s;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Small adder: 40 frames.
    for (int f = 0; f < 40; f++) begin
      int cyc, busy_cyc, expv;
      real err;
      for (int i = 0; i < MS; i++) p_s[i] = NS'($urandom);
      if (f == 0) for (int i = 0; i < MS; i++) p_s[i] = 6'd32 + 6'(i);
      start_s = 1;
      @(negedge clk);
      start_s = 0;
      cyc = 1; busy_cyc = 0;
      while (!done_s && cyc < 1000) begin
        busy_cyc += busy_s;
        if (cyc == 10) begin
          start_s = 1;   // must be ignored
        end else start_s = 0;
        @(negedge clk);
        cyc++;
      end
      start_s = 0;
      expv = cemux_ref_pkg::frame_estimate(QS, NS_NEG, MS, NS, (MAX_M*MAX_N)'(p_s));
      check(int'(est_s) == expv, $sformatf("small frame %0d: %0d vs %0d", f, est_s, expv));
      check(cyc == (1 << NS) + 1, $sformatf("small latency %0d", cyc));
      check(busy_cyc == (1 << NS), "small busy length");
      err = real'(est_s) / real'(1 << NS) - target(QS, NS_NEG, MS, NS, (MAX_M*MAX_N)'(p_s));
      if (err < 0) err = -err;
      if (err > max_err_s) max_err_s = err;
      check(err < 0.1, $sformatf("small accuracy %f", err));
      @(negedge clk);
    end
    // Full-size adder: 6 frames.
    for (int f = 0; f < 6; f++) begin
      int cyc, expv;
      real err;
      for (int i = 0; i < MF; i++) p_f[i] = NF'($urandom);
      start_f = 1;
      @(negedge clk);
      start_f = 0;
      cyc = 1;
      while (!done_f && cyc < 5000) begin
        @(negedge clk);
        cyc++;
      end
      expv = cemux_ref_pkg::frame_estimate(QF, NF_NEG, MF, NF, (MAX_M*MAX_N)'(p_f));
      check(int'(est_f) == expv, $sformatf("full frame %0d: %0d vs %0d", f, est_f, expv));
      check(cyc == (1 << NF) + 1, $sformatf("full latency %0d", cyc));
      err = real'(est_f) / real'(1 << NF) - target(QF, NF_NEG, MF, NF, (MAX_M*MAX_N)'(p_f));
      if (err < 0) err = -err;
      if (err > max_err_f) max_err_f = err;
      check(err < 0.02, $sformatf("full accuracy %f", err));
    end
    $display("max |error|: small %f, full %f", max_err_s, max_err_f);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
