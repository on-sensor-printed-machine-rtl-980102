// tb_bespoke_flash_adc: self-checking test of the bespoke flash ADC model.
// Three instances: the default 3-bit ADC keeping digits 1, 2, 4, 7 (four
// outputs); a full 4-bit ADC keeping all 15 digits (the conventional
// comparator bank, whose output must be a thermometer code); and a 4-bit
// ADC keeping digits 3 and 12 only. The expected digits come from
// round-to-nearest quantisation of vin, computed here: digit j of an N-bit
// ADC is 1 when round(vin * 2^N / VREF) >= j. Inputs are swept over every
// code, each at random positions inside its code bin (away from the bin
// edges), plus a few out-of-range voltages.
module tb_bespoke_flash_adc;

  int checks = 0, failures = 0;

  real vin;
  logic [3:0]  ud_ex;     // 3-bit, digits 1,2,4,7
  logic [14:0] ud_full;   // 4-bit, all digits
  logic [1:0]  ud_two;    // 4-bit, digits 3 and 12

  bespoke_flash_adc u_ex (.vin(vin), .ud(ud_ex));
  bespoke_flash_adc #(.RES_BITS(4), .RETAIN(15'h7fff)) u_full (.vin(vin), .ud(ud_full));
  bespoke_flash_adc #(.RES_BITS(4), .RETAIN(15'b000_1000_0000_0100)) u_two (.vin(vin), .ud(ud_two));

  function automatic int code_of(real v, int bits);
    int c;
    c = int'($floor(v * real'(2**bits) + 0.5));
    if (c < 0) c = 0;
    if (c > 2**bits - 1) c = 2**bits - 1;
    return c;
  endfunction

  task automatic check_all(input real v);
    int c3, c4;
    logic [3:0]  e_ex;
    logic [14:0] e_full;
    logic [1:0]  e_two;
    vin = v;
    #1;
    c3 = code_of(v, 3);
    c4 = code_of(v, 4);
    e_ex   = {c3 >= 7, c3 >= 4, c3 >= 2, c3 >= 1};
    for (int j = 1; j <= 15; j++) e_full[j-1] = (c4 >= j);
    e_two  = {c4 >= 12, c4 >= 3};
    checks += 3;
    if (ud_ex !== e_ex)     begin failures++; $display("FAIL ex   v=%f got %b exp %b", v, ud_ex, e_ex); end
    if (ud_full !== e_full) begin failures++; $display("FAIL full v=%f got %b exp %b", v, ud_full, e_full); end
    if (ud_two !== e_two)   begin failures++; $display("FAIL two  v=%f got %b exp %b", v, ud_two, e_two); end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vin = 0.0;
    #1;
    // Every 4-bit code at random spots in its bin (+-0.4 LSB of centre).
    for (int rep = 0; rep < 20; rep++)
      for (int c = 0; c < 16; c++)
        check_all((real'(c) + (real'($urandom_range(0, 800)) - 400.0) / 1000.0) / 16.0);
    // Every 3-bit code likewise, so that each 3-bit digit toggles. The
    // extra 1e-4 LSB keeps these points off the 4-bit bin edges.
    for (int rep = 0; rep < 20; rep++)
      for (int c = 0; c < 8; c++)
        check_all((real'(c) + 1.0e-4 + (real'($urandom_range(0, 800)) - 400.0) / 1000.0) / 8.0);
    check_all(-0.2);
    check_all(1.3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
