// tb_cemux_pkg: checks the elaboration-time weight processing of cemux_pkg.
// Small hand-worked cases of the quantisation rule (including both rounding-repair
// loops), the 8-slot example (4/8, 3/8, 1/8) and 16-slot example (7/16, 1/4, 1/4,
// 1/16) of a hardwired tree, and the default 100-tap lowpass filter, whose taps are
// recomputed here with the simulator's own $sin/$cos for comparison.
module tb_cemux_pkg;
  import cemux_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic mag_vec_t mags3(longint a0, longint a1, longint a2, longint a3);
    mag_vec_t a;
    for (int i = 0; i < MAX_M; i++) a[i] = 0;
    a[0] = a0; a[1] = a1; a[2] = a2; a[3] = a3;
    return a;
  endfunction

  q_vec_t q;

  initial begin
    // 3 inputs, 8 slots: exact quantisation.
    q = quantize(mags3(4, 3, 1, 0), 3, 3);
    check(q[0] == 4 && q[1] == 3 && q[2] == 1, "4/8 3/8 1/8");
    // Negative weights enter as magnitudes: 7/16, 1/4, 1/4, 1/16.
    q = quantize(mags3(7, 4, 4, 1), 4, 4);
    check(q[0] == 7 && q[1] == 4 && q[2] == 4 && q[3] == 1, "7/16 4/16 4/16 1/16");
    // t = 4/3 each -> q = 1,1,1 (sum 3 < 4) -> increment first of the tied largest.
    q = quantize(mags3(1, 1, 1, 0), 3, 2);
    check(q[0] == 2 && q[1] == 1 && q[2] == 1, "increment repair");
    // t = 2/3 each -> q = 1,1,1 (sum 3 > 2) -> decrement first of the tied largest.
    q = quantize(mags3(1, 1, 1, 0), 3, 1);
    check(q[0] == 0 && q[1] == 1 && q[2] == 1, "decrement repair");
    // weights 1,6,13 over 8 slots: t = 0.4 2.4 5.2 -> q = 0 2 5 (sum 7); shortfalls
    // t - q = 0.4 0.4 0.2 -> the first of the two largest is incremented.
    q = quantize(mags3(1, 6, 13, 0), 3, 3);
    check(q[0] + q[1] + q[2] == 8, "sum after repair");
    check(q[0] == 1 && q[1] == 2 && q[2] == 5, "largest shortfall gets the slot");
    // mux count: ones(7,4,4,1) = 3+1+1+1 = 6 -> 5 muxes (DDG tree of the example).
    q = quantize(mags3(7, 4, 4, 1), 4, 4);
    check(mux_count(q, 4) == 5, "mux count of the 16-slot example");

    // Default lowpass filter.
    begin
      real h [DEFAULT_M];
      real s, x, t;
      int  tot;
      q = ecg_q(DEFAULT_M, DEFAULT_N);
      s = 0.0;
      for (int k = 0; k < DEFAULT_M; k++) begin
        x = k - (DEFAULT_M - 1) / 2.0;
        h[k] = $sin(0.1 * 3.141592653589793 * x) / (3.141592653589793 * x)
               * (0.54 - 0.46 * $cos(2.0 * 3.141592653589793 * k / (DEFAULT_M - 1)));
        s += (h[k] < 0.0) ? -h[k] : h[k];
      end
      tot = 0;
      for (int k = 0; k < DEFAULT_M; k++) begin
        t = 1024.0 * ((h[k] < 0.0) ? -h[k] : h[k]) / s;
        tot += int'(q[k]);
        check((real'(q[k]) - t) < 1.0 && (t - real'(q[k])) < 1.0, $sformatf("tap %0d magnitude", k));
        check(ecg_neg(DEFAULT_M)[k] == (h[k] < 0.0), $sformatf("tap %0d sign", k));
      end
      check(tot == 1024, "default weights sum to 2^N");
      check(h[49] > 0.09 && h[49] < 0.11, "centre tap value");
      $display("default filter: %0d muxes in the hardwired tree", mux_count(q, DEFAULT_M));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
