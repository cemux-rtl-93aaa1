// tb_cemux_pcc_array: checks the comparator array and its correlation inverters.
// Six 6-bit inputs, signs +,-,-,+,-,+ . For every RNS value and random probabilities,
// x_i must be (r < p_i) for positive and (2^N - 1 - r < p_i) for negative weights.
// Over a full permutation of r each x_i must hold exactly p_i ones, and after the sign
// inversion every pair of streams must overlap maximally (SCC = +1).
module tb_cemux_pcc_array;
  localparam int N = 6, M = 6;
  localparam cemux_pkg::neg_vec_t NEG = cemux_pkg::neg_vec_t'(6'b010110);
  logic [N-1:0] r;
  logic [M-1:0][N-1:0] p;
  logic [M-1:0] x;
  int checks = 0, failures = 0;

  cemux_pcc_array #(.N(N), .M(M), .NEG(NEG)) dut (.r(r), .p(p), .x(x));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int trial = 0; trial < 20; trial++) begin
      int ones [M];
      int both [M][M];
      for (int i = 0; i < M; i++) begin
        p[i] = N'($urandom);
        ones[i] = 0;
        for (int j = 0; j < M; j++) both[i][j] = 0;
      end
      for (int v = 0; v < (1 << N); v++) begin
        logic [M-1:0] y;
        r = N'(v);
        #1;
        for (int i = 0; i < M; i++) begin
          int rv;
          rv = NEG[i] ? (1 << N) - 1 - v : v;
          check(x[i] == (rv < int'(p[i])), $sformatf("x[%0d] r=%0d p=%0d", i, v, p[i]));
          ones[i] += x[i];
        end
        y = x ^ NEG[M-1:0];
        for (int i = 0; i < M; i++) for (int j = 0; j < M; j++) both[i][j] += (y[i] & y[j]);
      end
      for (int i = 0; i < M; i++) begin
        int yi;
        yi = NEG[i] ? (1 << N) - ones[i] : ones[i];
        check(ones[i] == int'(p[i]), $sformatf("x[%0d] has p ones", i));
        for (int j = 0; j < M; j++) begin
          int yj;
          yj = NEG[j] ? (1 << N) - ones[j] : ones[j];
          check(both[i][j] == ((yi < yj) ? yi : yj), $sformatf("SCC(y%0d,y%0d) = +1", i, j));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
