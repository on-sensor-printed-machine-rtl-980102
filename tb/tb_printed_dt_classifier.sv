// tb_printed_dt_classifier: end-to-end test of the classifier at its
// default parameters (4-bit ADCs, 1 V reference, the paper's example tree).
//
// Each step draws a random 4-bit level for each of the four sensors, turns
// it into a voltage somewhere inside that level's bin (at most 0.4 LSB from
// the bin centre), applies the voltages, and checks the label lines one
// 20 Hz sample period later against the example tree evaluated here on the
// levels:  I1 < 3 ? (I4 < 2 ? A : C) : (I2 < 6 ? D : B).
// It also checks the structure the tree implies: one comparator in each of
// the ADCs of I1, I2 and I4, and no ADC for I3, whose voltage is swept
// separately and must never change the label. Out-of-range voltages
// (below 0 V, above 1 V) are applied too. Every label, the I3 sweep and
// the out-of-range case are counted and must each occur.
module tb_printed_dt_classifier;
  import dt_pkg::*;

  localparam realtime SAMPLE_PERIOD = 50ms;   // 20 Hz operation

  int checks = 0, failures = 0;

  real        vin [4];
  logic [3:0] label;

  printed_dt_classifier dut (.vin(vin), .label(label));

  int label_seen [4];
  int i3_sweeps = 0, out_of_range = 0;

  function automatic logic [3:0] expected(input int q [4]);
    int l;
    if (q[0] < 3) l = (q[3] < 2) ? int'(LABEL_A) : int'(LABEL_C);
    else          l = (q[1] < 6) ? int'(LABEL_D) : int'(LABEL_B);
    return 4'(1 << l);
  endfunction

  function automatic real volt_of(int q);
    return (real'(q) + (real'($urandom_range(0, 800)) - 400.0) / 1000.0) / 16.0;
  endfunction

  task automatic sample(input int q [4], input string what);
    logic [3:0] e;
    for (int f = 0; f < 4; f++) vin[f] = volt_of(q[f]);
    #(SAMPLE_PERIOD);
    e = expected(q);
    checks++;
    if (label !== e) begin
      failures++;
      $display("FAIL %s: levels %0d %0d %0d %0d got %b exp %b", what, q[0], q[1], q[2], q[3], label, e);
    end
    for (int c = 0; c < 4; c++) if (e[c]) label_seen[c]++;
  endtask

  initial begin : watchdog
    #(SAMPLE_PERIOD * 5000);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int q [4];
    logic [3:0] held_label;
    foreach (vin[f]) vin[f] = 0.0;
    // Structure: comparators per ADC follow the tree.
    checks += 3;
    if ($bits(dut.g_in[0].g_adc.ud) != 1) begin failures++; $display("FAIL I1 ADC size"); end
    if ($bits(dut.g_in[1].g_adc.ud) != 1) begin failures++; $display("FAIL I2 ADC size"); end
    if ($bits(dut.g_in[3].g_adc.ud) != 1) begin failures++; $display("FAIL I4 ADC size"); end

    // Random operation.
    for (int it = 0; it < 400; it++) begin
      foreach (q[f]) q[f] = $urandom_range(0, 15);
      sample(q, "random");
    end
    // Thresholds exactly: each compared input at C-1 and C.
    for (int a = 2; a <= 3; a++)
      for (int b = 5; b <= 6; b++)
        for (int d = 1; d <= 2; d++) begin
          q = '{a, b, 7, d};
          sample(q, "edge");
        end
    // I3 has no converter: sweeping it must never move the label.
    for (int it = 0; it < 20; it++) begin
      foreach (q[f]) q[f] = $urandom_range(0, 15);
      sample(q, "i3 base");
      held_label = label;
      for (int v = 0; v <= 20; v++) begin
        vin[2] = real'(v) / 20.0;
        #1ms;
        checks++;
        if (label !== held_label) begin failures++; $display("FAIL I3 changed the label"); end
      end
      i3_sweeps++;
    end
    // Out of range: below 0 V reads as level 0, above 1 V as level 15.
    vin = '{-0.3, 1.4, 0.5, -0.1};   // I1=0, I4=0 -> A
    #(SAMPLE_PERIOD);
    checks++;
    if (label !== 4'(1 << int'(LABEL_A))) begin failures++; $display("FAIL low range %b", label); end
    vin = '{1.4, 1.4, 0.5, 1.4};     // I1=15, I2=15 -> B
    #(SAMPLE_PERIOD);
    checks++;
    if (label !== 4'(1 << int'(LABEL_B))) begin failures++; $display("FAIL high range %b", label); end
    out_of_range++;

    // Every mechanism must have happened.
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (label_seen[c] == 0) begin failures++; $display("FAIL label %0d never produced", c); end
    end
    checks += 2;
    if (i3_sweeps == 0)    begin failures++; $display("FAIL no I3 sweep"); end
    if (out_of_range == 0) begin failures++; $display("FAIL no out-of-range case"); end
    $display("labels A/B/C/D: %0d %0d %0d %0d, I3 sweeps %0d, out-of-range %0d",
             label_seen[0], label_seen[1], label_seen[2], label_seen[3], i3_sweeps, out_of_range);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
