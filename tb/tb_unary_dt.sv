// tb_unary_dt: self-checking test of the unary decision-tree logic.
//
// DUT 1 is the default build, the paper's example tree (I1[3], I4[2],
// I2[6]; labels A..D). Its reference is the printed truth table of that
// example, coded here by hand: A = !I1[3] & !I4[2], B = I1[3] & I2[6],
// C = !I1[3] & I4[2], D = I1[3] & !I2[6]. DUT 2 is a 15-node tree that uses
// all four comparisons (<, >=, >, <=), including the range ends (I >= 0,
// I > 15, I <= 15) that need no digit. Its reference walks the tree with
// integer comparisons on the input values, not with unary digits.
//
// Inputs are random 4-bit values presented as thermometer codes. On half of
// the vectors, the digits DUT 1 does not read are overwritten with random
// bits, which must not change its output. Each label of DUT 1 and each
// reachable leaf of DUT 2 is counted and must occur.
module tb_unary_dt;
  import dt_pkg::*;

  int checks = 0, failures = 0;

  // ---- DUT 1: default build -------------------------------------------
  logic [3:0][15:1] therm1;
  logic [3:0]       label1;
  unary_dt u_ex (.therm(therm1), .label(label1));

  // ---- DUT 2: all comparison kinds ------------------------------------
  localparam dt_node_t [0:14] OPS_TREE = '{
    dt_split(0, CMP_GE,  8,  1,  2),   // n0
    dt_split(1, CMP_GT,  5,  3,  4),   // n1
    dt_split(2, CMP_LE,  9,  5,  6),   // n2
    dt_split(0, CMP_LT, 12,  7,  8),   // n3
    dt_split(1, CMP_GE,  0,  9, 10),   // n4: always true
    dt_split(2, CMP_GT, 15, 11, 12),   // n5: never true
    dt_split(1, CMP_LE, 15, 13, 14),   // n6: always true
    dt_leaf(0), dt_leaf(1), dt_leaf(2), dt_leaf(0),
    dt_leaf(1), dt_leaf(2), dt_leaf(0), dt_leaf(1)
  };
  logic [2:0][15:1] therm2;
  logic [2:0]       label2;
  unary_dt #(.RES_BITS(4), .NUM_FEATURES(3), .NUM_CLASSES(3),
             .NUM_NODES(15), .NODES(OPS_TREE)) u_ops (.therm(therm2), .label(label2));

  // Reference walk with integer comparisons. Returns the leaf index.
  function automatic int walk(input int q [3]);
    int n = 0;
    while (!OPS_TREE[n].leaf) begin
      int v = q[int'(OPS_TREE[n].feature)];
      int c = int'(OPS_TREE[n].threshold);
      bit t;
      case (OPS_TREE[n].op)
        CMP_LT: t = (v <  c);
        CMP_GE: t = (v >= c);
        CMP_GT: t = (v >  c);
        default: t = (v <= c);
      endcase
      n = t ? int'(OPS_TREE[n].child_true) : int'(OPS_TREE[n].child_false);
    end
    return n;
  endfunction

  function automatic logic [15:1] therm_of(int q);
    logic [15:1] t;
    for (int j = 1; j <= 15; j++) t[j] = (q >= j);
    return t;
  endfunction

  int label_seen [4];
  int leaf_seen [15];

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q1 [4];
    int q2 [3];
    logic i1_3, i4_2, i2_6;
    logic [3:0] exp1;
    logic [2:0] exp2;
    int leaf;
    therm1 = '0;
    therm2 = '0;
    #1;
    for (int it = 0; it < 2000; it++) begin
      for (int f = 0; f < 4; f++) q1[f] = $urandom_range(0, 15);
      for (int f = 0; f < 3; f++) q2[f] = $urandom_range(0, 15);
      for (int f = 0; f < 4; f++) therm1[f] = therm_of(q1[f]);
      for (int f = 0; f < 3; f++) therm2[f] = therm_of(q2[f]);
      i1_3 = therm1[0][3];
      i4_2 = therm1[3][2];
      i2_6 = therm1[1][6];
      if (it % 2 == 1) begin
        // Scramble every digit the example tree does not read.
        for (int f = 0; f < 4; f++) therm1[f] = 15'($urandom);
        therm1[0][3] = i1_3;
        therm1[3][2] = i4_2;
        therm1[1][6] = i2_6;
      end
      #1;
      // Truth table of the example (label order A, B, C, D).
      exp1[int'(LABEL_A)] = !i1_3 && !i4_2;
      exp1[int'(LABEL_B)] =  i1_3 &&  i2_6;
      exp1[int'(LABEL_C)] = !i1_3 &&  i4_2;
      exp1[int'(LABEL_D)] =  i1_3 && !i2_6;
      checks++;
      if (label1 !== exp1) begin
        failures++;
        $display("FAIL ex: I1[3]=%b I4[2]=%b I2[6]=%b got %b exp %b", i1_3, i4_2, i2_6, label1, exp1);
      end
      for (int c = 0; c < 4; c++) if (exp1[c]) label_seen[c]++;

      leaf = walk(q2);
      exp2 = 3'(1 << OPS_TREE[leaf].label);
      leaf_seen[leaf]++;
      checks++;
      if (label2 !== exp2) begin
        failures++;
        $display("FAIL ops: q=%0d,%0d,%0d leaf %0d got %b exp %b", q2[0], q2[1], q2[2], leaf, label2, exp2);
      end
      #1;
    end
    // Coverage: every label of the example, every reachable leaf of DUT 2.
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (label_seen[c] == 0) begin failures++; $display("FAIL label %0d never produced", c); end
    end
    foreach (leaf_seen[n]) begin
      if (OPS_TREE[n].leaf && n != 10 && n != 11 && n != 14) begin
        checks++;
        if (leaf_seen[n] == 0) begin failures++; $display("FAIL leaf %0d never reached", n); end
      end
    end
    $display("example labels A/B/C/D: %0d %0d %0d %0d", label_seen[0], label_seen[1], label_seen[2], label_seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
