`timescale 1ns/1ps
// wilkinson_ramp_model: BEHAVIOURAL MODEL (not synthesizable logic) of the
// two banks of 16 Wilkinson ramps and comparators on TARGET 1.
//
// A Wilkinson conversion raises a ramp voltage linearly; each comparator
// output (WilkOut) rises when the ramp reaches the voltage of its cell, and
// stops the matching counter in the FPGA (paper). Bank "top" serves channels
// 0-7, bank "bottom" channels 8-15 (the top/bottom naming of the outputs
// is this design's reading of WilkOut_Top/WilkOut_Bot).
//
// Model: while ramp_clr is high the ramp sits at RAMP_START_MV; while
// ramp_en is high (and ramp_clr low) it rises by MV_PER_NS x 2^(12-adc_bits)
// per ns in steps of STEP_NS. On the chip the ramp speed is an external
// control voltage; the adc_bits input stands for setting it so that the
// counter range (2^adc_bits counts) spans the same input range. The defaults
// follow the paper's numbers: 0.681 mV per count at 445 MHz (0.303 mV/ns)
// and a start of -40 mV, which puts 0.6 V near count 940 as measured.
// The measured transfer function is not linear; the model is.
module wilkinson_ramp_model
  import target_pkg::*;
#(
  parameter real RAMP_START_MV = -40.0,
  parameter real MV_PER_NS     = 0.30305,
  parameter real STEP_NS       = 0.1
) (
  input  logic                   ramp_en,
  input  logic                   ramp_clr,
  input  logic [3:0]             adc_bits,
  input  mv_t                    top_mv [BLOCK_CELLS],
  input  mv_t                    bot_mv [BLOCK_CELLS],
  output logic [BLOCK_CELLS-1:0] wilk_out_top,
  output logic [BLOCK_CELLS-1:0] wilk_out_bot
);

  real  v_ramp = RAMP_START_MV;
  logic tick   = 1'b0;

  // integration clock of the model, STEP_NS period
  always #(STEP_NS / 2.0) tick = ~tick;

  always @(posedge tick) begin
    if (ramp_clr)
      v_ramp = RAMP_START_MV;
    else if (ramp_en)
      v_ramp = v_ramp + MV_PER_NS * STEP_NS * real'(1 << (12 - int'(adc_bits)));
  end

  always_comb begin
    for (int i = 0; i < BLOCK_CELLS; i++) begin
      wilk_out_top[i] = !ramp_clr && (v_ramp >= real'(top_mv[i]));
      wilk_out_bot[i] = !ramp_clr && (v_ramp >= real'(bot_mv[i]));
    end
  end

endmodule
