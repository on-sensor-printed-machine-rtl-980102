// tb_shared_digits: checks how the classifier sizes its converters when
// splits share inputs and digits. The tree below has four splits:
//   n0: I0 <  5   (digit 5 of I0: new ADC)
//   n1: I1 >= 3   (digit 3 of I1: new ADC)
//   n2: I1 >  2   (digit 3 of I1 again: shared, no new comparator)
//   n3: I0 <  2   (digit 2 of I0: one more comparator on the I0 ADC)
// and input I2 is never compared. Expected: the I0 ADC has 2 comparators,
// the I1 ADC 1, and I2 none. The labels are checked against an integer walk
// of the same tree for every combination of input levels.
module tb_shared_digits;
  import dt_pkg::*;

  localparam dt_node_t [0:8] TREE = '{
    dt_split(0, CMP_LT, 5, 1, 2),
    dt_split(1, CMP_GE, 3, 3, 4),
    dt_split(1, CMP_GT, 2, 5, 6),
    dt_split(0, CMP_LT, 2, 7, 8),
    dt_leaf(0), dt_leaf(1), dt_leaf(2), dt_leaf(0), dt_leaf(1)
  };

  int checks = 0, failures = 0;
  real        vin [3];
  logic [2:0] label;

  printed_dt_classifier #(.NUM_FEATURES(3), .NUM_CLASSES(3), .NUM_NODES(9), .NODES(TREE))
    dut (.vin(vin), .label(label));

  function automatic logic [2:0] expected(int q0, int q1);
    int l;
    if (q0 < 5) begin
      if (q1 >= 3) l = (q0 < 2) ? 0 : 1;
      else         l = 0;
    end else begin
      l = (q1 > 2) ? 1 : 2;
    end
    return 3'(1 << l);
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static int seen [3] = '{0, 0, 0};
    checks += 2;
    if ($bits(dut.g_in[0].g_adc.ud) != 2) begin failures++; $display("FAIL I0 ADC should keep 2 comparators"); end
    if ($bits(dut.g_in[1].g_adc.ud) != 1) begin failures++; $display("FAIL I1 ADC should keep 1 comparator"); end
    for (int q0 = 0; q0 < 16; q0++)
      for (int q1 = 0; q1 < 16; q1++) begin
        logic [2:0] e;
        vin[0] = (real'(q0) + 0.3) / 16.0;
        vin[1] = (real'(q1) - 0.3) / 16.0;
        vin[2] = real'($urandom_range(0, 1000)) / 1000.0;
        #10;
        e = expected(q0, q1);
        checks++;
        if (label !== e) begin
          failures++;
          $display("FAIL levels %0d %0d got %b exp %b", q0, q1, label, e);
        end
        for (int c = 0; c < 3; c++) if (e[c]) seen[c]++;
      end
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (seen[c] == 0) begin failures++; $display("FAIL label %0d never produced", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
