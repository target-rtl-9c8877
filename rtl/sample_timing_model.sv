`timescale 1ns/1ps
// sample_timing_model: BEHAVIOURAL MODEL (not synthesizable logic) of the
// TARGET 1 sample timing generator and its ripple oscillator output.
//
// On the chip a voltage-controlled delay line, steered by the external
// voltages ROVDD and ROGND, sets the sampling rate (0.7 to 2.3 GSa/s; 1 GSa/s
// at ROVDD = 1.955 V, ROGND = 0.595 V), and a ripple oscillator output runs at
// a frequency proportional to it (paper). The model takes the code of the
// external ROVDD DAC (DAC_BITS bits over 0..DAC_FS_MV, assumed), converts it
// to a rate f = 1 GSa/s + (ROVDD - 1.955 V) x GHZ_PER_V, clamped to
// 0.7..2.3 GSa/s, and toggles smp_clk at that rate. rco toggles every
// RCO_DIV/2 samples, i.e. runs at f / RCO_DIV. The straight-line fit, its
// slope and RCO_DIV are this design's choices; the measured curve is
// slightly concave. Row-to-row rate differences are not modelled.
module sample_timing_model #(
  parameter int  DAC_BITS  = 12,
  parameter real DAC_FS_MV = 2500.0,
  parameter real GHZ_PER_V = 2.5,
  parameter int  RCO_DIV   = 64
) (
  input  logic [DAC_BITS-1:0] rovdd_code,
  output logic                smp_clk,
  output logic                rco,
  output real                 f_gsps
);

  always_comb begin
    real v;
    v = real'(rovdd_code) * DAC_FS_MV / real'(1 << DAC_BITS);
    f_gsps = 1.0 + (v - 1955.0) / 1000.0 * GHZ_PER_V;
    if (f_gsps < 0.7) f_gsps = 0.7;
    if (f_gsps > 2.3) f_gsps = 2.3;
  end

  logic clk_q = 1'b0;
  logic rco_q = 1'b0;
  int   n     = 0;

  always begin
    #(0.5 / f_gsps);
    clk_q = ~clk_q;
    if (clk_q) begin
      n = n + 1;
      if (n >= RCO_DIV / 2) begin
        n     = 0;
        rco_q = ~rco_q;
      end
    end
  end

  assign smp_clk = clk_q;
  assign rco     = rco_q;

endmodule
