// tb_cemux_precise_sampler: checks the select counter at its default 10-bit size.
// Step k after a clear must give select word k, last must be high exactly on the final
// step of each 2^N-step frame, en = 0 must hold and clear must return to 0.
module tb_cemux_precise_sampler;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [N-1:0] sel;
  logic last;
  int checks = 0, failures = 0;

  cemux_precise_sampler #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .en(en),
                                      .sel(sel), .last(last));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int lasts = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    en = 1;
    for (int k = 0; k < 2 * (1 << N); k++) begin
      check(int'(sel) == k % (1 << N), $sformatf("step %0d", k));
      check(last == (k % (1 << N) == (1 << N) - 1), $sformatf("last at step %0d", k));
      if (last) lasts++;
      @(negedge clk);
    end
    check(lasts == 2, "one last per frame");
    repeat (5) @(negedge clk);
    en = 0;
    repeat (3) @(negedge clk);
    check(sel == 5, "en = 0 holds");
    clear = 1;
    @(negedge clk);
    check(sel == 0, "clear");
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
