// dt_workload_run: drives one printed_dt_classifier built for a synthetic
// tree of a given size and checks it against a software walk of the tree.
//
// The tree has N_SPLITS internal nodes laid out as a heap (children of node
// i are 2i+1 and 2i+2), so N_SPLITS <= 255 gives depth <= 8, and
// N_SPLITS + 1 leaves. Split i compares input (i mod N_INPUTS) for the
// first N_INPUTS splits, so every input is used, and a pseudo-random input
// after that; comparison kind and 4-bit threshold are pseudo-random too.
// Leaf k carries label k mod N_CLASSES. All pseudo-random choices come from
// a 32-bit LCG seeded with SEED: x' = 1664525 x + 1013904223.
//
// N_VECTORS random sensor vectors are applied, each voltage inside its
// level's bin; the label lines must equal the one-hot label of the leaf
// the walk reaches. Results are left in checks/failures/done and the
// number of distinct leaves reached in leaves_hit.
module dt_workload_run import dt_pkg::*; #(
  parameter int unsigned N_SPLITS  = 7,
  parameter int unsigned N_INPUTS  = 5,
  parameter int unsigned N_CLASSES = 3,
  parameter int unsigned N_VECTORS = 300,
  parameter int unsigned SEED      = 1
) (
  output int checks,
  output int failures,
  output int leaves_hit,
  output bit done
);

  localparam int unsigned N_NODES = 2 * N_SPLITS + 1;
  typedef dt_node_t [0:N_NODES-1] tree_t;

  function automatic int unsigned lcg(int unsigned x);
    return 1664525 * x + 1013904223;
  endfunction

  function automatic tree_t make_tree();
    tree_t t;
    int unsigned x = SEED;
    for (int unsigned i = 0; i < N_NODES; i++) begin
      if (i < N_SPLITS) begin
        int unsigned f;
        x = lcg(x);
        f = (i < N_INPUTS) ? i : (x >> 8) % N_INPUTS;
        x = lcg(x);
        t[i] = dt_split(8'(f), cmp_op_e'((x >> 12) % 4), 8'((x >> 20) % 16),
                        16'(2 * i + 1), 16'(2 * i + 2));
      end else begin
        t[i] = dt_leaf(8'((i - N_SPLITS) % N_CLASSES));
      end
    end
    return t;
  endfunction

  localparam tree_t TREE = make_tree();

  real                   vin [N_INPUTS];
  logic [N_CLASSES-1:0]  label;

  printed_dt_classifier #(
    .RES_BITS     (4),
    .NUM_FEATURES (N_INPUTS),
    .NUM_CLASSES  (N_CLASSES),
    .NUM_NODES    (N_NODES),
    .NODES        (TREE)
  ) dut (.vin(vin), .label(label));

  function automatic int unsigned walk(input int q [N_INPUTS]);
    int unsigned n = 0;
    while (!TREE[n].leaf) begin
      int v = q[int'(TREE[n].feature)];
      int c = int'(TREE[n].threshold);
      bit tk;
      case (TREE[n].op)
        CMP_LT:  tk = (v <  c);
        CMP_GE:  tk = (v >= c);
        CMP_GT:  tk = (v >  c);
        default: tk = (v <= c);
      endcase
      n = tk ? 32'(TREE[n].child_true) : 32'(TREE[n].child_false);
    end
    return n;
  endfunction

  bit hit [N_NODES];

  initial begin
    int q [N_INPUTS];
    int unsigned leaf;
    logic [N_CLASSES-1:0] e;
    checks = 0; failures = 0; leaves_hit = 0; done = 0;
    foreach (hit[n]) hit[n] = 0;
    foreach (vin[f]) vin[f] = 0.0;
    #1;
    for (int unsigned it = 0; it < N_VECTORS; it++) begin
      foreach (q[f]) begin
        q[f]   = $urandom_range(0, 15);
        vin[f] = (real'(q[f]) + (real'($urandom_range(0, 800)) - 400.0) / 1000.0) / 16.0;
      end
      #10;
      leaf = walk(q);
      e = '0;
      e[int'(TREE[leaf].label)] = 1'b1;
      checks++;
      if (label !== e) begin
        failures++;
        if (failures < 5)
          $display("FAIL splits=%0d: leaf %0d got %b exp %b", N_SPLITS, leaf, label, e);
      end
      if (!hit[leaf]) begin hit[leaf] = 1; leaves_hit++; end
    end
    done = 1;
  end

endmodule
