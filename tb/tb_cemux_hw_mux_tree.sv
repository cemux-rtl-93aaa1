// tb_cemux_hw_mux_tree: checks the hardwired tree in three configurations:
//   A: 4 inputs, 16 slots, weights 7/16, 1/4, 1/4, 1/16 (a tree of 5 muxes);
//   B: 4 equal weights 1/4, where the output order must be
//      A A A A B B B B C C C C D D D D as the select counter runs;
//   C: the default 100-input, 10-bit lowpass configuration.
// For every select word each input is driven alone to 1 to find the input the tree
// selects; it must match the reference layout, each input must own exactly q_i select
// words, and the words it owns must form aligned blocks, one of size 2^(N-k) per set
// bit k of its weight.
module tb_cemux_hw_mux_tree;
  import cemux_pkg::*;
  function automatic q_vec_t mk4(int q0, int q1, int q2, int q3);
    q_vec_t q;
    q = '0;
    q[0] = 17'(q0); q[1] = 17'(q1); q[2] = 17'(q2); q[3] = 17'(q3);
    return q;
  endfunction
  localparam q_vec_t QA = mk4(7, 4, 4, 1);
  localparam q_vec_t QB = mk4(4, 4, 4, 4);
  localparam q_vec_t QC = ecg_q(DEFAULT_M, DEFAULT_N);

  logic [3:0] ya, yb, sela, selb;
  logic za, zb;
  logic [DEFAULT_M-1:0] yc;
  logic [DEFAULT_N-1:0] selc;
  logic zc;
  int checks = 0, failures = 0;

  cemux_hw_mux_tree #(.N(4), .M(4), .Q(QA)) dut_a (.y(ya), .sel(sela), .z(za));
  cemux_hw_mux_tree #(.N(4), .M(4), .Q(QB)) dut_b (.y(yb), .sel(selb), .z(zb));
  cemux_hw_mux_tree dut_c (.y(yc), .sel(selc), .z(zc));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int own_a [16];
    int own_b [16];
    int own_c [1 << DEFAULT_N];
    int cnt;
    // A and B: probe each select word with one-hot inputs.
    for (int s = 0; s < 16; s++) begin
      sela = 4'(s); selb = 4'(s);
      own_a[s] = -1; own_b[s] = -1;
      for (int i = 0; i < 4; i++) begin
        ya = 4'(1 << i); yb = 4'(1 << i);
        #1;
        if (za) begin check(own_a[s] < 0, "A: two inputs answer"); own_a[s] = i; end
        if (zb) begin check(own_b[s] < 0, "B: two inputs answer"); own_b[s] = i; end
      end
      check(own_a[s] == cemux_ref_pkg::owner(QA, 4, 4, s), $sformatf("A: slot %0d", s));
      check(own_b[s] == s / 4, $sformatf("B: slot %0d run order", s));
    end
    for (int i = 0; i < 4; i++) begin
      cnt = 0;
      for (int s = 0; s < 16; s++) cnt += (own_a[s] == i);
      check(cnt == int'(QA[i]), $sformatf("A: input %0d sampled q times", i));
    end
    // C: default configuration.
    for (int s = 0; s < (1 << DEFAULT_N); s++) begin
      selc = DEFAULT_N'(s);
      own_c[s] = -1;
      for (int i = 0; i < DEFAULT_M; i++) begin
        yc = '0; yc[i] = 1'b1;
        #1;
        if (zc) begin check(own_c[s] < 0, "C: two inputs answer"); own_c[s] = i; end
      end
      check(own_c[s] == cemux_ref_pkg::owner(QC, DEFAULT_M, DEFAULT_N, s), $sformatf("C: slot %0d", s));
    end
    for (int i = 0; i < DEFAULT_M; i++) begin
      int blocks;
      cnt = 0;
      blocks = 0;
      for (int s = 0; s < (1 << DEFAULT_N); s++) cnt += (own_c[s] == i);
      check(cnt == int'(QC[i]), $sformatf("C: input %0d sampled q times", i));
      // aligned block check, level by level
      for (int k = 1; k <= DEFAULT_N; k++) begin
        int sz, found;
        sz = 1 << (DEFAULT_N - k);
        found = 0;
        for (int b = 0; b < (1 << DEFAULT_N); b += sz) begin
          bit whole;
          whole = 1;
          for (int s = b; s < b + sz; s++) if (own_c[s] != i) whole = 0;
          // a leaf is a whole block whose parent block is not wholly the same input
          if (whole) begin
            int pb;
            bit parent_whole;
            pb = (b / (2 * sz)) * (2 * sz);
            parent_whole = 1;
            for (int s = pb; s < pb + 2 * sz; s++) if (own_c[s] != i) parent_whole = 0;
            if (!parent_whole) found++;
          end
        end
        check(found == int'(QC[i][DEFAULT_N-k]), $sformatf("C: input %0d level %0d leaves", i, k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
