`timescale 1ns/1ps
// input_termination_model: BEHAVIOURAL MODEL (not synthesizable logic) of the
// switchable input termination of the 16 TARGET 1 channels.
//
// Each AC-coupled input can be tied to the pedestal voltage Vped through
// three resistors, 100 ohm, 1 kohm and 10 kohm, each behind its own switch
// S1, S2, S3, set by the 3-bit Sel_Term from the FPGA (paper). A
// photodetector acts as a current source, so the chosen resistance sets the
// voltage gain. The model returns Vped + I x R, with R the parallel value of
// the closed switches, in whole millivolts and clamped to 0..65535 mV; with
// all switches open the input stays at Vped. Sel_Term[0]=S1, [1]=S2, [2]=S3
// is this design's bit order. The AC coupling and the buffer tree that
// follows (both analog) are not modelled.
module input_termination_model
  import target_pkg::*;
(
  input  ua_t        i_ua [NUM_CH],   // input currents, microamps
  input  logic [2:0] sel_term,        // S3, S2, S1 closed when 1
  input  mv_t        vped_mv,
  output mv_t        vout_mv [NUM_CH]
);

  int g_us;   // conductance in microsiemens
  assign g_us = (sel_term[0] ? 10000 : 0) + (sel_term[1] ? 1000 : 0) + (sel_term[2] ? 100 : 0);

  always_comb begin
    for (int c = 0; c < NUM_CH; c++) begin
      int v;
      v = int'(vped_mv);
      if (g_us != 0) v = v + (int'(i_ua[c]) * 1000) / g_us;
      if (v < 0)     v = 0;
      if (v > 65535) v = 65535;
      vout_mv[c] = mv_t'(v);
    end
  end

endmodule
