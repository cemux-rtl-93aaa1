// tb_workload_ecg: the ECG lowpass filtering experiments of CeMux.
//
//   Tap sweep at 10-bit precision: M = 25, 50, ..., 250. Published RMS errors of the
//   10-bit CeMux filter over this range are 4.2e-3 to 6.3e-3 and never above 2^-7; here
//   each filter must stay below 2^-7 = 7.8e-3.
//   Precision sweep at M = 150: N = 6, 8 and 10 (64-, 256- and 1024-bit streams).
//   Published: below 2^-4 already with 64-bit streams, and the error roughly halves
//   for every doubling of the stream length past that, so N = 6 must stay below 2^-4,
//   N = 8 below 2^-5 and N = 10 below 2^-7.
// The coefficients are this design's default windowed-sinc lowpass (cutoff 0.1 pi)
// and the input a synthetic noisy ECG-like waveform, so the numbers are comparable
// with, but not identical to, the published ones.
module tb_workload_ecg;
  localparam int NT = 10;
  localparam int MT [NT] = '{25, 50, 75, 100, 125, 150, 175, 200, 225, 250};
  localparam int NP = 3;
  localparam int NPV [NP] = '{6, 8, 10};
  localparam real LIMP [NP] = '{0.0625, 0.03125, 0.0078125};
  logic clk = 0, rst_n = 0;
  logic fin_t [NT];
  logic fin_p [NP];
  real  r_t [NT];
  real  r_p [NP];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar c = 0; c < NT; c++) begin : g_taps
    tb_ecg_channel #(.M(MT[c]), .N(10), .OUTS(150)) u_ch (
      .clk(clk), .rst_n(rst_n), .finished(fin_t[c]), .rmse(r_t[c]));
  end
  for (genvar c = 0; c < NP; c++) begin : g_prec
    tb_ecg_channel #(.M(150), .N(NPV[c]), .OUTS(150)) u_ch (
      .clk(clk), .rst_n(rst_n), .finished(fin_p[c]), .rmse(r_p[c]));
  end

  initial begin
    bit all;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do begin
      @(negedge clk);
      all = 1;
      for (int c = 0; c < NT; c++) all &= fin_t[c];
      for (int c = 0; c < NP; c++) all &= fin_p[c];
    end while (!all);
    for (int c = 0; c < NT; c++) begin
      $display("N = 10, M = %0d: RMSE = %f", MT[c], r_t[c]);
      checks++;
      if (!(r_t[c] < 0.0078125)) begin failures++; $display("FAIL: M = %0d above 2^-7", MT[c]); end
    end
    for (int c = 0; c < NP; c++) begin
      $display("M = 150, N = %0d (%0d-bit streams): RMSE = %f", NPV[c], 1 << NPV[c], r_p[c]);
      checks++;
      if (!(r_p[c] < LIMP[c])) begin failures++; $display("FAIL: N = %0d above %f", NPV[c], LIMP[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400 * 1040 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
