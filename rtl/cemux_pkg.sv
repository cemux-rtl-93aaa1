// cemux_pkg: shared constants, types and elaboration-time weight processing for the
// CeMux (correlation-enhanced multiplexer) stochastic weighted adder.
//
// What it holds
//   * The default precision N (stream length 2^N) and input count M of the ECG
//     filter configuration: N = 10, M = 100.
//   * The packed vector types in which a CeMux instance receives its hardwired weights:
//     q_vec_t holds one quantised weight magnitude q_i (a numerator over 2^N) per input,
//     neg_vec_t one sign bit per input (1 = negative weight).
//   * quantize(): weight normalisation and quantisation. Given integer weight magnitudes
//     a_i it returns q_i with sum(q_i) = 2^N, following the rule of the original
//     design: t_i = 2^N a_i / sum(a); q_i = round(t_i); while sum(q) > 2^N decrement the
//     q_i with the largest q_i - t_i; while sum(q) < 2^N increment the q_i with the
//     largest t_i - q_i. It is done in exact integer arithmetic: t_i - q_i is compared
//     as (2^N a_i - q_i S) / S with the common denominator S = sum(a). Ties go to the
//     lowest index; exact halves round up.
//   * lowpass_coef(): the default filter. An M-tap windowed-sinc lowpass FIR with cutoff
//     0.1*pi rad/sample and a Hamming window,
//         h_k = (0.54 - 0.46 cos(2 pi k/(M-1))) * sin(0.1 pi x)/(pi x),  x = k - (M-1)/2,
//     (h = 0.1 at x = 0). The original work took its coefficients from a filter-design
//     tool without listing them; this windowed design is this implementation's choice.
//     sin and cos are evaluated with a range-reduced Taylor series so the whole
//     computation is an elaboration-time constant function.
//   * ecg_q() / ecg_neg(): the default q and sign vectors for an M-tap, N-bit filter.
//
// Everything here is evaluated at elaboration; nothing in this package becomes hardware.
package cemux_pkg;

  // Default configuration of the ECG case study: 10-bit precision, 100 taps.
  localparam int unsigned DEFAULT_N = 10;
  localparam int unsigned DEFAULT_M = 100;

  // Upper bounds for the packed weight vectors. 256 is the largest input count evaluated
  // for the adder; 16 bits of precision means 65536-bit streams.
  localparam int unsigned MAX_M = 256;
  localparam int unsigned MAX_N = 16;

  // One quantised magnitude per input, MAX_N+1 bits so that a single input can hold
  // the whole 2^N.
  typedef logic [MAX_M-1:0][MAX_N:0] q_vec_t;
  typedef logic [MAX_M-1:0]          neg_vec_t;
  // Integer weight magnitudes fed to quantize().
  typedef longint unsigned           mag_vec_t [MAX_M];

  localparam real PI = 3.14159265358979323846;

  // sin(x) by range reduction to [-pi, pi] and a Taylor series.
  function automatic real sin_r(real x);
    real s, term, y;
    y = x;
    while (y > PI)  y = y - 2.0 * PI;
    while (y < -PI) y = y + 2.0 * PI;
    s = y;
    term = y;
    for (int k = 1; k < 24; k++) begin
      term = -term * y * y / real'((2 * k) * (2 * k + 1));
      s = s + term;
    end
    return s;
  endfunction

  function automatic real cos_r(real x);
    return sin_r(x + PI / 2.0);
  endfunction

  // Tap k of the default M-tap lowpass filter (cutoff 0.1*pi, Hamming window).
  function automatic real lowpass_coef(int k, int m);
    real x, h, w;
    x = real'(k) - real'(m - 1) / 2.0;
    if (x == 0.0) h = 0.1;
    else          h = sin_r(0.1 * PI * x) / (PI * x);
    if (m > 1) w = 0.54 - 0.46 * cos_r(2.0 * PI * real'(k) / real'(m - 1));
    else       w = 1.0;
    return h * w;
  endfunction

  // Weight normalisation and quantisation on integer magnitudes a[0..m-1].
  function automatic q_vec_t quantize(mag_vec_t a, int m, int n);
    q_vec_t          q;
    longint          qi [MAX_M];
    longint          s, total, full, best, d;
    int              bi;
    q     = '0;
    s     = 0;
    full  = longint'(1) << n;
    for (int i = 0; i < m; i++) s += longint'(a[i]);
    if (s == 0) s = 1;
    total = 0;
    for (int i = 0; i < MAX_M; i++) begin
      // round(2^n a_i / s), halves up: floor((2^(n+1) a_i + s) / (2 s))
      if (i < m) qi[i] = ((longint'(a[i]) << (n + 1)) + s) / (2 * s);
      else       qi[i] = 0;
      total += qi[i];
    end
    // Sum too large: decrement where q_i - t_i is largest.
    while (total > full) begin
      bi = -1; best = 0;
      for (int i = 0; i < m; i++) begin
        d = qi[i] * s - (longint'(a[i]) << n);   // S * (q_i - t_i)
        if (qi[i] > 0 && (bi < 0 || d > best)) begin
          best = d; bi = i;
        end
      end
      qi[bi] = qi[bi] - 1;
      total  = total - 1;
    end
    // Sum too small: increment where t_i - q_i is largest.
    while (total < full) begin
      bi = 0;
      best = (longint'(a[0]) << n) - qi[0] * s;
      for (int i = 1; i < m; i++) begin
        d = (longint'(a[i]) << n) - qi[i] * s;    // S * (t_i - q_i)
        if (d > best) begin
          best = d; bi = i;
        end
      end
      qi[bi] = qi[bi] + 1;
      total  = total + 1;
    end
    for (int i = 0; i < m; i++) q[i] = (MAX_N + 1)'(qi[i]);
    return q;
  endfunction

  // Magnitudes of the default lowpass taps, scaled by 2^40 and rounded.
  function automatic mag_vec_t lowpass_mags(int m);
    mag_vec_t a;
    real      h;
    for (int i = 0; i < MAX_M; i++) begin
      if (i < m) begin
        h = lowpass_coef(i, m);
        if (h < 0.0) h = -h;
        a[i] = longint'(h * 1099511627776.0 + 0.5);
      end else begin
        a[i] = 0;
      end
    end
    return a;
  endfunction

  function automatic q_vec_t ecg_q(int m, int n);
    return quantize(lowpass_mags(m), m, n);
  endfunction

  function automatic neg_vec_t ecg_neg(int m);
    neg_vec_t s;
    s = '0;
    for (int i = 0; i < m; i++) s[i] = (lowpass_coef(i, m) < 0.0);
    return s;
  endfunction

  // Number of 2:1 muxes in a height-n DDG hardwired tree: (number of 1s in all q_i) - 1.
  function automatic int mux_count(q_vec_t q, int m);
    int ones;
    ones = 0;
    for (int i = 0; i < m; i++)
      for (int b = 0; b <= MAX_N; b++) ones += int'(q[i][b]);
    return ones - 1;
  endfunction

endpackage
