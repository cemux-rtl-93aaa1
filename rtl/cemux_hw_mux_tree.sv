// cemux_hw_mux_tree: the hardwired weighted mux tree of CeMux.
//
// The tree has height N. Conceptually it has 2^N input slots, slot s being chosen when
// the select word equals s (select bit N-1 at the root, level 1; bit 0 at level N; a 0
// on a select line picks the lower half of the slots). Input y_i is hardwired to q_i
// slots, so with a select word that visits every slot once per 2^N cycles, y_i is
// sampled exactly q_i times and the output z is a stream of value
// sum_i (q_i / 2^N) * value(y_i).
//
// Slot assignment (discrete distribution generating tree). Input i gets one block of
// 2^(N-k) consecutive slots for every 1 in bit 2^-k of its weight q_i / 2^N, i.e. one
// leaf at level k of the tree. Blocks are handed out level by level, largest first, and
// within a level in input order, so every block is aligned to its own size and forms a
// complete subtree. Each such subtree reduces to a wire, and only the nodes whose slot
// range mixes inputs remain as 2:1 muxes: the tree holds (total number of 1s in all
// q_i) - 1 muxes, which grows linearly in N instead of 2^N - 1.
// The level-by-level construction and the counter wiring follow the original design;
// the order of leaves inside a level (input order, lower slots first) is this
// implementation's choice, as the original fixes only the level of each leaf.
//
// Implementation: nodes are numbered as a heap (root 1, children 2j and 2j+1, node j at
// depth d covers 2^(N-d) slots). At elaboration each node is classified as a leaf (all
// its slots belong to one input: a wire), a mux (mixed slots) or removed (inside a
// leaf's subtree). Removed nodes are tied to 0 and read by nothing.
//
// Interface: y are the M weighted-input streams, sel the select word, z the output.
// Purely combinational. Q must sum to 2^N; this is checked at elaboration.
module cemux_hw_mux_tree #(
  parameter int unsigned         N = cemux_pkg::DEFAULT_N,
  parameter int unsigned         M = cemux_pkg::DEFAULT_M,
  parameter cemux_pkg::q_vec_t   Q = cemux_pkg::ecg_q(M, N)
) (
  input  logic [M-1:0] y,
  input  logic [N-1:0] sel,
  output logic         z
);

  localparam int unsigned SLOTS = 1 << N;

  typedef int unsigned slot_map_t [SLOTS];

  // Slot -> input index, allocated level by level (DDG construction).
  function automatic slot_map_t build_map(cemux_pkg::q_vec_t q);
    slot_map_t   map;
    int unsigned ptr;
    ptr = 0;
    for (int s = 0; s < SLOTS; s++) map[s] = 0;
    for (int k = 1; k <= N; k++) begin
      for (int i = 0; i < M; i++) begin
        if (q[i][N-k]) begin
          for (int s = 0; s < (1 << (N - k)); s++) map[ptr + s] = i;
          ptr += (1 << (N - k));
        end
      end
    end
    // A weight equal to the whole stream (q_i = 2^N) occupies every slot.
    for (int i = 0; i < M; i++) begin
      if (q[i][N]) begin
        for (int s = 0; s < SLOTS; s++) map[s] = i;
      end
    end
    return map;
  endfunction

  function automatic int unsigned q_sum(cemux_pkg::q_vec_t q);
    int unsigned t;
    t = 0;
    for (int i = 0; i < M; i++) t += int'(q[i]);
    return t;
  endfunction

  localparam slot_map_t MAP = build_map(Q);

  // 1 when all slots of node j (heap numbering) belong to the same input.
  function automatic bit uniform(slot_map_t map, int unsigned j);
    int unsigned d, lo, sz;
    d = $clog2(j + 1) - 1;            // depth below the root
    sz = SLOTS >> d;
    lo = (j - (1 << d)) * sz;
    for (int unsigned s = lo + 1; s < lo + sz; s++)
      if (map[s] != map[lo]) return 1'b0;
    return 1'b1;
  endfunction

  if (q_sum(Q) != SLOTS) begin : g_bad_weights
    $fatal(1, "cemux_hw_mux_tree: quantised weights must sum to 2^N");
  end

  logic [2*SLOTS-1:1] node;

  for (genvar j = 1; j < 2 * SLOTS; j++) begin : g_node
    localparam int unsigned DEPTH = $clog2(j + 1) - 1;
    localparam int unsigned FIRST = (j - (1 << DEPTH)) * (SLOTS >> DEPTH);
    if (j > 1 && uniform(MAP, j / 2)) begin : g_removed
      assign node[j] = 1'b0;
    end else if (uniform(MAP, j)) begin : g_leaf
      assign node[j] = y[MAP[FIRST]];
    end else begin : g_mux
      // A 2:1 mux at tree level DEPTH+1, steered by select bit N-1-DEPTH.
      assign node[j] = sel[N-1-DEPTH] ? node[2*j+1] : node[2*j];
    end
  end

  assign z = node[1];

endmodule
