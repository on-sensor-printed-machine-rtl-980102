// bespoke_flash_adc: behavioural model of a bespoke (tree-specific) flash ADC.
// This is a mixed-signal part; the model is not synthesizable logic.
//
// A conventional RES_BITS flash ADC has a resistor ladder between 0 V and
// VREF, 2^RES_BITS-1 comparators that together produce a thermometer code
// U[1..2^RES_BITS-1] of vin, and a priority encoder to binary. The bespoke
// ADC drops the encoder, so the thermometer digits themselves are the
// output, and keeps only the comparators whose digits the classifier reads.
// RETAIN marks those digits (bit j set = keep comparator j); the ADC then has
// NUM_UD = $countones(RETAIN) outputs, ud[0] being the lowest retained digit
// and ud[NUM_UD-1] the highest. The defaults are the paper's 4-output example
// of a 3-bit ADC keeping digits 1, 2, 4 and 7.
//
// Ladder: comparator j sits on the tap
//     Vref_j = (j - 1/2) * VREF / 2^RES_BITS,
// half an LSB below level j, which makes the digits a round-to-nearest
// quantisation of vin: U[j] = 1 exactly when round(vin /
// LSB) >= j. The paper says each reference is "the midpoint of each
// segment"; the exact half-LSB placement is this design's reading of that.
// VREF defaults to the paper's 1 V supply. The ladder is modelled as ideal
// voltage taps; the resistors of dropped comparators remain (only their
// comparators go), as in the paper.
//
// Timing: each comparator has the propagation delay T_PD (default 0); the
// converter has no clock and no state.
module bespoke_flash_adc #(
  parameter int unsigned                 RES_BITS = 3,
  parameter real                         VREF     = 1.0,
  parameter logic [(2**RES_BITS)-1:1]    RETAIN   = 7'b1001011,
  parameter realtime                     T_PD     = 0.0,
  localparam int unsigned                NUM_UD   = $countones(RETAIN)
) (
  input  real               vin,   // sensor voltage (V)
  output logic [NUM_UD-1:0] ud     // retained unary digits, ascending
);

  localparam int unsigned LEVELS = 2**RES_BITS;

  // Position of digit j among the retained outputs.
  function automatic int unsigned out_index(int unsigned j);
    int unsigned n = 0;
    for (int unsigned i = 1; i < j; i++) begin
      if (RETAIN[i]) n++;
    end
    return n;
  endfunction

  // Ideal ladder tap of comparator j.
  function automatic real tap(int unsigned j);
    return (real'(j) - 0.5) * VREF / real'(LEVELS);
  endfunction

  for (genvar j = 1; j < LEVELS; j++) begin : g_cmp
    if (RETAIN[j]) begin : g_keep
      localparam int unsigned K = out_index(j);
      real  vref_j;
      logic u_j;
      assign vref_j = tap(j);
      flash_comparator #(.T_PD(T_PD)) u_cmp (
        .vin  (vin),
        .vref (vref_j),
        .out  (u_j)
      );
      assign ud[K] = u_j;
    end
  end

endmodule
