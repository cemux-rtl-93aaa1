// cemux_ref_pkg: reference models shared by the CeMux testbenches.
//
// owner(): which input a hardwired tree sends to the output for select word s. Inputs
// are laid out level by level: at level k (k = 1 is the root) every input whose weight
// q_i has bit N-k set receives the next 2^(N-k) consecutive select words, inputs taken
// in index order.
// frame_estimate(): the exact up-down count of one CeMux frame, worked out bit by bit
// from the definition: at step t the select word is t, the data RNS value is the
// radix-2 van der Corput number of t, the chosen input's bit is (R < p) with R
// mirrored for negative weights, inverted again for negative weights.
package cemux_ref_pkg;
  import cemux_pkg::*;

  function automatic int owner(q_vec_t q, int m, int n, int s);
    int base;
    base = 0;
    for (int k = 1; k <= n; k++)
      for (int i = 0; i < m; i++)
        if (q[i][n-k]) begin
          if (s >= base && s < base + (1 << (n - k))) return i;
          base += 1 << (n - k);
        end
    for (int i = 0; i < m; i++) if (q[i][n]) return i;
    return -1;
  endfunction

  function automatic int vdc(int t, int n);
    int v;
    v = 0;
    for (int b = 0; b < n; b++) if (((t >> b) & 1) != 0) v += 1 << (n - 1 - b);
    return v;
  endfunction

  // p[i] packed as n-bit fields of a wide vector.
  function automatic int frame_estimate(q_vec_t q, neg_vec_t neg, int m, int n,
                                        logic [MAX_M*MAX_N-1:0] p);
    int acc, i, r, pi;
    bit y;
    acc = 0;
    for (int t = 0; t < (1 << n); t++) begin
      i  = owner(q, m, n, t);
      r  = vdc(t, n);
      if (neg[i]) r = (1 << n) - 1 - r;
      pi = int'((p >> (i * n)) & ((1 << n) - 1));
      y  = (r < pi) ^ neg[i];
      acc += y ? 1 : -1;
    end
    return acc;
  endfunction

  // Pseudo-random weights for the random-weight experiments: magnitudes uniform in
  // [0, 2^30) and random signs, from a 64-bit linear congruential generator, so that
  // weight w_i = (neg_i ? -1 : 1) * mag_i / 2^30 is uniform in (-1, 1).
  function automatic longint unsigned lcg(longint unsigned x);
    return x * 64'd6364136223846793005 + 64'd1442695040888963407;
  endfunction

  function automatic mag_vec_t rand_mags(int m, int seed);
    mag_vec_t a;
    longint unsigned x;
    x = longint'(seed) * 64'd977 + 64'd12345;
    for (int i = 0; i < MAX_M; i++) begin
      x = lcg(x);
      a[i] = (i < m) ? (x >> 34) : 0;
    end
    return a;
  endfunction

  function automatic neg_vec_t rand_neg(int m, int seed);
    neg_vec_t s;
    longint unsigned x;
    x = longint'(seed) * 64'd131 + 64'd777;
    s = '0;
    for (int i = 0; i < m; i++) begin
      x = lcg(x);
      s[i] = x[40];
    end
    return s;
  endfunction

  // Deterministic ECG-like test waveform in [-1, 1): a sharp spike every 90 samples
  // (QRS-like), a smaller rounded wave after it, a slow baseline wander, and uniform
  // noise of amplitude 0.1 drawn from a hash of the sample index.
  function automatic real ecg_signal(int t);
    real phase, v, noise;
    longint unsigned x;
    phase = real'(t % 90) / 90.0;
    v = 0.15 * $sin(2.0 * 3.141592653589793 * t / 300.0);
    if (phase > 0.45 && phase < 0.55)
      v += 0.7 * (1.0 - 20.0 * ((phase > 0.5) ? phase - 0.5 : 0.5 - phase));
    if (phase > 0.70 && phase < 0.85)
      v += 0.2 * $sin(3.141592653589793 * (phase - 0.70) / 0.15);
    x = lcg(lcg(longint'(t) + 64'd99));
    noise = real'(x >> 44) / real'(1 << 20);
    v += 0.2 * (noise - 0.5);
    return v - 0.1;
  endfunction

  // Tap k of the ideal M-tap lowpass filter (cutoff 0.1 pi, Hamming window), with the
  // simulator's own $sin/$cos.
  function automatic real ideal_tap(int k, int m);
    real xx;
    xx = k - (m - 1) / 2.0;
    if (xx == 0.0) return 0.1 * (0.54 - 0.46 * $cos(2.0 * 3.141592653589793 * k / (m - 1)));
    return $sin(0.1 * 3.141592653589793 * xx) / (3.141592653589793 * xx)
           * (0.54 - 0.46 * $cos(2.0 * 3.141592653589793 * k / (m - 1)));
  endfunction
endpackage
