// tb_cemux_sobol_rns: checks the low-discrepancy source at its default 10-bit size.
// After a clear, step k must give the bit reversal of k (built here from the numeric
// value rather than by rewiring bits), every value must appear once per 2^N steps,
// every aligned run of 4 steps must hit each quarter of the range once, and en = 0
// must hold the value.
module tb_cemux_sobol_rns;
  localparam int N = 10;
  logic clk = 0, rst_n = 0, clear = 0, en = 0;
  logic [N-1:0] r;
  int checks = 0, failures = 0;
  bit seen [1 << N];

  cemux_sobol_rns #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .clear(clear), .en(en), .r(r));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // van der Corput radix-2 value of k, as an N-bit integer: sum of 2^(N-1-b) per set bit b.
  function automatic int vdc(int k);
    int v = 0;
    for (int b = 0; b < N; b++) if ((k >> b) & 1) v += 1 << (N - 1 - b);
    return v;
  endfunction

  initial begin
    int quarter_hits [4];
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(r == 0, "reset value");
    en = 1;
    for (int k = 0; k < (1 << N); k++) begin
      check(int'(r) == vdc(k), $sformatf("step %0d", k));
      check(!seen[r], "value repeats within a frame");
      seen[r] = 1;
      if (k % 4 == 0) quarter_hits = '{0, 0, 0, 0};
      quarter_hits[r >> (N - 2)]++;
      if (k % 4 == 3) check(quarter_hits == '{1, 1, 1, 1}, "aligned run of 4 not stratified");
      @(negedge clk);
    end
    check(r == 0, "wraps after 2^N steps");
    @(negedge clk); @(negedge clk);
    en = 0;
    begin
      logic [N-1:0] held;
      held = r;
      repeat (3) @(negedge clk);
      check(r == held, "en = 0 holds");
    end
    en = 1; clear = 1;
    @(negedge clk);
    check(r == 0, "clear");
    clear = 0;
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
