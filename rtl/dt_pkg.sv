// dt_pkg: types, constants and helper functions shared by the bespoke unary
// decision-tree classifier.
//
// A trained decision tree is handed to the hardware as an elaboration-time
// parameter: a packed array dt_node_t [0:NUM_NODES-1] (ascending, so that a
// '{...} literal lists node 0 first), node 0 being the root. A packed array
// keeps the tree usable in constant functions of every tool.
// An internal node holds one comparison "I[feature] op C" and the indices of
// the nodes reached when the comparison is true or false; a leaf holds a
// class label. Thresholds C are integers in units of one LSB of the inputs'
// Q0.N format, i.e. C is the number of ones of C written in unary.
//
// The central rule of the design lives here (cmp_digit / cmp_sense): with the
// input I available as a parallel thermometer code U[1..2^N-1] (U[j] = 1 when
// I >= j), every comparison with a hard-wired constant is a single wire:
//     I >= C  ==  U[C]        I >  C  ==  U[C+1]
//     I <  C  == !U[C]        I <= C  == !U[C+1]
// Digit 0 reads as constant 1 and digit 2^N as constant 0, so comparisons
// against the ends of the range need no comparator at all. The four
// relations follow the paper; the handling of the range ends is this
// design's own.
//
// Field widths of dt_node_t are fixed here (a packed struct cannot be
// parameterised): up to 256 inputs, 65536 nodes, 256 classes and 8-bit
// thresholds (RES_BITS <= 7). These limits are this design's choice.
package dt_pkg;

  // Comparison carried out at a split node.
  typedef enum logic [1:0] {
    CMP_LT = 2'd0,   // I <  C
    CMP_GE = 2'd1,   // I >= C
    CMP_GT = 2'd2,   // I >  C
    CMP_LE = 2'd3    // I <= C
  } cmp_op_e;

  typedef struct packed {
    logic        leaf;         // 1: leaf node, only 'label' is used
    logic [7:0]  feature;      // input index compared at this split
    cmp_op_e     op;           // comparison
    logic [7:0]  threshold;    // C in LSBs of the input format
    logic [15:0] child_true;   // node taken when the comparison holds
    logic [15:0] child_false;  // node taken when it does not
    logic [7:0]  label;        // class of a leaf
  } dt_node_t;

  // Index of the unary digit that decides "I op C".
  function automatic int unsigned cmp_digit(cmp_op_e op, int unsigned c);
    return (op == CMP_GT || op == CMP_LE) ? c + 1 : c;
  endfunction

  // Value of that digit for which the comparison is true.
  function automatic logic cmp_sense(cmp_op_e op);
    return (op == CMP_GE || op == CMP_GT);
  endfunction

  // Record builders, to keep tree literals readable.
  function automatic dt_node_t dt_split(logic [7:0] feature, cmp_op_e op,
                                        logic [7:0] threshold,
                                        logic [15:0] child_true,
                                        logic [15:0] child_false);
    dt_node_t n;
    n             = '0;
    n.leaf        = 1'b0;
    n.feature     = feature;
    n.op          = op;
    n.threshold   = threshold;
    n.child_true  = child_true;
    n.child_false = child_false;
    return n;
  endfunction

  function automatic dt_node_t dt_leaf(logic [7:0] label);
    dt_node_t n;
    n       = '0;
    n.leaf  = 1'b1;
    n.label = label;
    return n;
  endfunction

  // Example tree of the paper's unary-translation figure: inputs I1..I4
  // are feature indices 0..3, labels A, B, C, D are classes 0..3, and the
  // thresholds are the unary digit indices printed there (I1[3], I4[2],
  // I2[6]).
  localparam int unsigned EX_FEATURES = 4;
  localparam int unsigned EX_CLASSES  = 4;
  localparam int unsigned EX_NODES    = 7;
  localparam logic [7:0] LABEL_A = 8'd0, LABEL_B = 8'd1, LABEL_C = 8'd2, LABEL_D = 8'd3;

  localparam dt_node_t [0:EX_NODES-1] EX_TREE = '{
    dt_split(0, CMP_LT, 3, 1, 2),   // n0: I1 < 0.375  -> I1[3]
    dt_split(3, CMP_LT, 2, 3, 4),   // n1: I4 < 0.5    -> I4[2]
    dt_split(1, CMP_LT, 6, 5, 6),   // n2: I2 < 0.75   -> I2[6]
    dt_leaf(LABEL_A),               // n3
    dt_leaf(LABEL_C),               // n4
    dt_leaf(LABEL_D),               // n5
    dt_leaf(LABEL_B)                // n6
  };

endpackage
