`timescale 1ns/1ps
// trigger_comparator_model: BEHAVIOURAL MODEL (not synthesizable logic) of
// the 16 self-trigger comparators of TARGET 1.
//
// Each channel has an analog comparator; all share one externally supplied
// threshold voltage, and they can be set to fire on signals going above or
// below it (paper). The model compares the terminated input voltage with the
// threshold: hit = v > vthr, or v < vthr when falling is set. Hysteresis and
// comparator delay are not modelled.
module trigger_comparator_model
  import target_pkg::*;
(
  input  mv_t               vin_mv [NUM_CH],
  input  mv_t               vthr_mv,
  input  logic              falling,
  output logic [NUM_CH-1:0] hit
);

  always_comb
    for (int c = 0; c < NUM_CH; c++)
      hit[c] = falling ? (vin_mv[c] < vthr_mv) : (vin_mv[c] > vthr_mv);

endmodule
