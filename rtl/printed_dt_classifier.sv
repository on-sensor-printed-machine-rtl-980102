// printed_dt_classifier: on-sensor printed decision-tree classifier, sensor
// voltages in, class lines out.
//
// The design co-designs the converters with the tree. For every input the
// tree compares, one bespoke flash ADC is placed, and it keeps exactly the
// comparators whose thermometer digits the tree's splits read: a split
// "I op C" reads digit C (for < and >=) or C+1 (for > and <=). Inputs the
// tree never compares get no ADC at all, and no ADC has an encoder. The
// retained digits, in parallel, drive unary_dt, which is two-level AND-OR
// logic. The comparator sets are computed at elaboration from the NODES
// parameter, so the whole classifier is specialised by one parameter: the
// trained tree. This structure is the paper's.
//
// Defaults: 4-bit input precision (the paper's evaluation setting), 1 V
// reference (its supply), and the paper's example tree, which compares I1,
// I2 and I4 against one digit each: three 1-comparator ADCs, none for I3.
//
// Interface: vin[f] is the analog voltage of sensor f (0 .. VREF); label has
// one line per class, exactly one of them high. The circuit has no clock,
// no reset and no state: the label follows the inputs after the comparator
// delay T_PD (default 0). The ADC instances are behavioural models of
// analog parts, so this module is not synthesizable as a whole; unary_dt
// is its synthesizable digital part.
module printed_dt_classifier import dt_pkg::*; #(
  parameter int unsigned RES_BITS     = 4,
  parameter real         VREF         = 1.0,
  parameter realtime     T_PD         = 0.0,
  parameter int unsigned NUM_FEATURES = EX_FEATURES,
  parameter int unsigned NUM_CLASSES  = EX_CLASSES,
  parameter int unsigned NUM_NODES    = EX_NODES,
  parameter dt_node_t [0:NUM_NODES-1] NODES = EX_TREE
) (
  input  real                    vin [NUM_FEATURES],
  output logic [NUM_CLASSES-1:0] label
);

  localparam int unsigned LEVELS = 2**RES_BITS;

  // Digits of input f that some split reads (bit j = comparator j kept).
  function automatic logic [LEVELS-1:1] retained_digits(int unsigned f);
    logic [LEVELS-1:1] m = '0;
    for (int unsigned n = 0; n < NUM_NODES; n++) begin
      if (!NODES[n].leaf && 32'(NODES[n].feature) == f) begin
        int unsigned d = cmp_digit(NODES[n].op, 32'(NODES[n].threshold));
        if (d >= 1 && d < LEVELS) m[d] = 1'b1;
      end
    end
    return m;
  endfunction

  // Position of digit j among the retained digits of mask m.
  function automatic int unsigned out_index(logic [LEVELS-1:1] m, int unsigned j);
    int unsigned k = 0;
    for (int unsigned i = 1; i < j; i++) begin
      if (m[i]) k++;
    end
    return k;
  endfunction

  logic [NUM_FEATURES-1:0][LEVELS-1:1] therm;

  for (genvar f = 0; f < NUM_FEATURES; f++) begin : g_in
    localparam logic [LEVELS-1:1] RETAIN = retained_digits(f);
    if (RETAIN != '0) begin : g_adc
      localparam int unsigned NUM_UD = $countones(RETAIN);
      logic [NUM_UD-1:0] ud;
      bespoke_flash_adc #(
        .RES_BITS (RES_BITS),
        .VREF     (VREF),
        .RETAIN   (RETAIN),
        .T_PD     (T_PD)
      ) u_adc (
        .vin (vin[f]),
        .ud  (ud)
      );
      // Place each retained digit at its thermometer position; digits that
      // are not generated read as 0 and no split uses them.
      for (genvar j = 1; j < LEVELS; j++) begin : g_digit
        if (RETAIN[j]) begin : g_kept
          localparam int unsigned K = out_index(RETAIN, j);
          assign therm[f][j] = ud[K];
        end else begin : g_dropped
          assign therm[f][j] = 1'b0;
        end
      end
    end else begin : g_no_adc
      // The tree never compares this input: no converter is built.
      assign therm[f] = '0;
    end
  end

  unary_dt #(
    .RES_BITS     (RES_BITS),
    .NUM_FEATURES (NUM_FEATURES),
    .NUM_CLASSES  (NUM_CLASSES),
    .NUM_NODES    (NUM_NODES),
    .NODES        (NODES)
  ) u_tree (
    .therm (therm),
    .label (label)
  );

endmodule
