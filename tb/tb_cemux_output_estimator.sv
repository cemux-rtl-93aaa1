// tb_cemux_output_estimator: random 2^N-bit frames at the default 10-bit size, plus the
// all-ones and all-zeros extremes (+2^N and -2^N, which an N+1-bit counter could not
// hold). The count must equal (#ones - #zeros); en = 0 must hold and clear must zero it.
module tb_cemux_output_estimator;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, clear = 0, en = 0, z = 0;
  logic signed [N+1:0] count;
  int checks = 0, failures = 0;

  cemux_output_estimator #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .en(en),
                                       .z(z), .count(count));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(count == 0, "reset");
    for (int f = 0; f < 6; f++) begin
      int expected, density;
      expected = 0;
      density = (f == 0) ? 100 : (f == 1) ? 0 : $urandom_range(0, 100);
      clear = 1; en = 0;
      @(negedge clk);
      clear = 0; en = 1;
      for (int k = 0; k < (1 << N); k++) begin
        z = ($urandom_range(0, 99) < density);
        expected += z ? 1 : -1;
        @(negedge clk);
      end
      en = 0;
      check(int'(count) == expected, $sformatf("frame %0d: %0d vs %0d", f, count, expected));
      z = 1;
      repeat (3) @(negedge clk);
      check(int'(count) == expected, "en = 0 holds");
    end
    clear = 1;
    @(negedge clk);
    check(count == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
