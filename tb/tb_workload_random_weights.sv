// tb_workload_random_weights: the random-weight accuracy experiment of CeMux.
//
// Precision N = 10 (1024-bit streams); adders with M = 8, 16, 32, 64, 128 and 256
// inputs, each with its own random weights in (-1, 1), evaluated over 1000 frames of
// random inputs in [-1, 1). For every M the RMS error, normalised by multiplying with
// sqrt(1024), must stay below 0.5. Published results for this construction are about
// 0.1 at M = 8 rising to about 0.4 at M = 256, against about 0.8 without precise
// sampling and about 1.0 for a conventional hardwired mux adder, so the bound separates
// CeMux from its degraded forms. Normalised errors must also grow with M overall
// (M = 256 worse than M = 8), as in the published trend.
module tb_workload_random_weights;
  localparam int NCH = 6;
  localparam int MS [NCH] = '{8, 16, 32, 64, 128, 256};
  logic clk = 0, rst_n = 0;
  logic fin [NCH];
  real  nr [NCH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    tb_random_channel #(.M(MS[c]), .N(10), .R(1000), .SEED(c + 1)) u_ch (
      .clk(clk), .rst_n(rst_n), .finished(fin[c]), .nrmse(nr[c]));
  end

  initial begin
    bit all;
    repeat (3) @(negedge clk);
    rst_n = 1;
    do begin
      @(negedge clk);
      all = 1;
      for (int c = 0; c < NCH; c++) all &= fin[c];
    end while (!all);
    for (int c = 0; c < NCH; c++) begin
      $display("M = %0d: normalised RMSE = %f", MS[c], nr[c]);
      checks++;
      if (!(nr[c] < 0.5)) begin failures++; $display("FAIL: M = %0d too inaccurate", MS[c]); end
    end
    checks++;
    if (!(nr[NCH-1] > nr[0])) begin failures++; $display("FAIL: error does not grow with M"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000 * 1030 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
