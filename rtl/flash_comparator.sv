// flash_comparator: behavioural model of one printed flash-ADC comparator.
// This is an analog part; the model is not synthesizable logic.
//
// The sensor voltage vin drives the non-inverting input and a tap of the
// reference ladder drives the inverting input. The output is 1 when vin is
// larger than vref and 0 otherwise, as the paper states. The real part is an
// EGFET comparator characterised by SPICE; the model has no offset, noise
// or hysteresis. Its only timing is an optional propagation delay T_PD
// (default 0, since the paper gives no comparator delay), applied to
// every output change.
module flash_comparator #(
  parameter realtime T_PD = 0.0
) (
  input  real  vin,    // analog input (V)
  input  real  vref,   // reference tap (V)
  output logic out     // 1: vin > vref
);

  // Transport delay: every input change re-evaluates the comparison and
  // the result appears T_PD later.
  always @(vin or vref) begin
    out <= #(T_PD) (vin > vref);
  end

endmodule
