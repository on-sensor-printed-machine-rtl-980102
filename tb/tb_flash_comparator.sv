// tb_flash_comparator: self-checking test of the comparator model.
// Drives random (vin, vref) pairs, including pairs a tiny step either side of
// equality, and checks out == (vin > vref). A second instance with a
// propagation delay of 5 time units checks that its output holds the old
// value before the delay has elapsed and the new value after it.
module tb_flash_comparator;

  int checks = 0, failures = 0;

  real  vin, vref;
  logic out_fast, out_slow;

  flash_comparator u_fast (.vin(vin), .vref(vref), .out(out_fast));
  flash_comparator #(.T_PD(5.0)) u_slow (.vin(vin), .vref(vref), .out(out_slow));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: vin=%f vref=%f got %b exp %b", what, vin, vref, got, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vin = 0.0; vref = 0.5;
    #10;
    for (int i = 0; i < 200; i++) begin
      vin  = real'($urandom_range(0, 1000)) / 1000.0;
      vref = real'($urandom_range(0, 1000)) / 1000.0;
      if (i % 4 == 1) vin = vref + 1.0e-6;   // just above
      if (i % 4 == 2) vin = vref - 1.0e-6;   // just below
      if (i % 4 == 3) vin = vref;            // equal: not larger
      #1;
      check(out_fast, (i % 4 == 1) ? 1'b1 : (i % 4 >= 2) ? 1'b0 : (vin > vref), "static");
      #10;
    end
    // Delay: swing from low to high, output must lag by T_PD.
    vref = 0.5; vin = 0.2; #20;
    check(out_slow, 1'b0, "delay settle low");
    vin = 0.8; #4;
    check(out_slow, 1'b0, "before T_PD");
    #2;
    check(out_slow, 1'b1, "after T_PD");
    vin = 0.1; #4;
    check(out_slow, 1'b1, "before T_PD fall");
    #2;
    check(out_slow, 1'b0, "after T_PD fall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
