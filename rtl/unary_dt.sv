// unary_dt: bespoke, fully parallel decision-tree classifier on unary inputs.
//
// Each input arrives as a parallel thermometer code, therm[f][j] = 1 when
// input f is at least j LSBs (j = 1 .. 2^RES_BITS-1). Because the tree's
// thresholds are constants, every split "I[f] op C" is a single digit of
// therm[f] (see dt_pkg::cmp_digit), possibly inverted: the tree needs no
// magnitude comparator. A leaf is reached when all splits on its path agree,
// so each leaf is one AND of path literals, and each class output is the OR
// of the leaves carrying that label: the classifier is two-level AND-OR
// logic over a handful of input digits. All of this follows the paper.
//
// The tree comes in through the NODES parameter (see dt_pkg), defaulting to
// the paper's example tree with its printed digits I1[3], I4[2], I2[6].
// The AND/OR terms are found at elaboration: a table of every node's parent
// is built in one pass, then for every leaf a constant function walks from
// the leaf up to the root and records which splits lie on the path (CARE)
// and which branch is taken there (DIR). Digits of therm
// that no split reads are left unconnected; a bespoke ADC does not produce
// them.
//
// Interface: therm in, label out, one line per class, exactly one line high
// for any well-formed tree (checked by an assertion). The block is purely
// combinational and has no clock; a classification takes one evaluation.
// The one-hot label lines follow the paper's figure; an encoded class index
// is not produced.
module unary_dt import dt_pkg::*; #(
  parameter int unsigned RES_BITS     = 4,
  parameter int unsigned NUM_FEATURES = EX_FEATURES,
  parameter int unsigned NUM_CLASSES  = EX_CLASSES,
  parameter int unsigned NUM_NODES    = EX_NODES,
  parameter dt_node_t [0:NUM_NODES-1] NODES = EX_TREE
) (
  input  logic [NUM_FEATURES-1:0][(2**RES_BITS)-1:1] therm,
  output logic [NUM_CLASSES-1:0]                     label
);

  localparam int unsigned TOP_DIGIT = (2**RES_BITS) - 1;

  // Parent of every node, from one pass over the splits (root: 0).
  function automatic logic [NUM_NODES-1:0][15:0] parents();
    logic [NUM_NODES-1:0][15:0] p = '0;
    for (int unsigned i = 0; i < NUM_NODES; i++) begin
      if (!NODES[i].leaf) begin
        p[NODES[i].child_true]  = 16'(i);
        p[NODES[i].child_false] = 16'(i);
      end
    end
    return p;
  endfunction

  localparam logic [NUM_NODES-1:0][15:0] PARENT = parents();

  // Splits on the path from the root to node n (want_dir = 0), or the branch
  // taken at each of them, 1 = comparison true (want_dir = 1).
  function automatic logic [NUM_NODES-1:0] path_mask(int unsigned n, bit want_dir);
    logic [NUM_NODES-1:0] care = '0;
    logic [NUM_NODES-1:0] dir  = '0;
    int unsigned cur = n;
    for (int unsigned step = 0; step < NUM_NODES && cur != 0; step++) begin
      int unsigned p = 32'(PARENT[cur]);
      care[p] = 1'b1;
      dir[p]  = (32'(NODES[p].child_true) == cur);
      cur     = p;
    end
    return want_dir ? dir : care;
  endfunction

  // Outcome of every split, taken straight from one unary digit.
  logic [NUM_NODES-1:0] split_true;
  // One bit per leaf: its product term.
  logic [NUM_NODES-1:0] leaf_hit;

  for (genvar n = 0; n < NUM_NODES; n++) begin : g_node
    if (NODES[n].leaf) begin : g_leaf
      localparam logic [NUM_NODES-1:0] CARE = path_mask(n, 1'b0);
      localparam logic [NUM_NODES-1:0] DIR  = path_mask(n, 1'b1);
      assign split_true[n] = 1'b0;
      // AND over the path literals.
      assign leaf_hit[n]   = &(~CARE | ~(split_true ^ DIR));
    end else begin : g_split
      localparam int unsigned F     = 32'(NODES[n].feature);
      localparam int unsigned DIGIT = cmp_digit(NODES[n].op, 32'(NODES[n].threshold));
      localparam logic        SENSE = cmp_sense(NODES[n].op);
      logic digit_value;
      if (DIGIT == 0) begin : g_const1
        assign digit_value = 1'b1;                 // I >= 0 always holds
      end else if (DIGIT > TOP_DIGIT) begin : g_const0
        assign digit_value = 1'b0;                 // I > max never holds
      end else begin : g_wire
        assign digit_value = therm[F][DIGIT];
      end
      assign split_true[n] = (digit_value == SENSE);
      assign leaf_hit[n]   = 1'b0;
    end
  end

  // OR of the leaves of each class.
  function automatic logic [NUM_NODES-1:0] class_leaves(int unsigned c);
    logic [NUM_NODES-1:0] m = '0;
    for (int unsigned i = 0; i < NUM_NODES; i++)
      m[i] = NODES[i].leaf && (32'(NODES[i].label) == c);
    return m;
  endfunction

  for (genvar c = 0; c < NUM_CLASSES; c++) begin : g_class
    localparam logic [NUM_NODES-1:0] LEAVES = class_leaves(c);
    assign label[c] = |(leaf_hit & LEAVES);
  end

  // A tree routes every input to exactly one leaf, whatever the digits.
  always_comb begin
    assert #0 ($onehot(leaf_hit))
      else $error("unary_dt: %0d leaves selected", $countones(leaf_hit));
  end

endmodule
