// tb_cemux_delay_line: shifts random samples into a 5-tap, 4-bit line and compares
// every tap with a queue model; checks the mid-scale reset value and that taps hold
// while shift is low.
module tb_cemux_delay_line;
  localparam int N = 4, M = 5;
  logic clk = 0, rst_n = 0, shift = 0;
  logic [N-1:0] din = 0;
  logic [M-1:0][N-1:0] taps;
  int checks = 0, failures = 0;
  logic [N-1:0] model [M];

  cemux_delay_line #(.N(N), .M(M)) dut (.clk(clk), .rst_n(rst_n), .shift(shift), .din(din),
                                        .taps(taps));

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < M; k++) model[k] = 4'd8;
    for (int t = 0; t < 200; t++) begin
      for (int k = 0; k < M; k++) begin
        checks++;
        if (taps[k] != model[k]) begin
          failures++;
          $display("FAIL: t=%0d tap %0d = %0d, expected %0d", t, k, taps[k], model[k]);
        end
      end
      shift = $urandom_range(0, 1);
      din = N'($urandom);
      if (shift) begin
        for (int k = M - 1; k > 0; k--) model[k] = model[k-1];
        model[0] = din;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
