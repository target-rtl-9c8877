`timescale 1ns/1ps
// target1_asic: BEHAVIOURAL MODEL of the TARGET 1 chip (16-channel
// switched-capacitor digitizer with self trigger), with the digital parts as
// synthesizable logic and the analog parts as models.
//
// Contents, per the paper's functional diagram: input termination (model),
// 16 x 4096-cell storage array (model), sample timing generator with ripple
// oscillator output (model), 16 trigger comparators (model) feeding the
// trigger OR / polarity / width logic (trigger_logic), the block decoder
// (block_decoder) and the two banks of 16 Wilkinson ramps and comparators
// (model). The Wilkinson counters are not on this chip: WilkOut_Top/Bot go
// to the FPGA.
//
// Pins follow the paper's diagram where it names them (Sel_Term[2:0],
// Sel_Row[6:0], Sel_Col[4:0], SmplCtrl[9:0], WilkOut_Top[15:0],
// WilkOut_Bot[15:0]). The 7-bit Trigger bus is named but its bits are not,
// so its functions appear as separate pins (threshold, edge, polarity,
// width, DHIT). The ramp start/clear controls, the ramp speed (given here as
// the intended ADC depth), ROVDD and the clock used for the trigger width
// are separate pins of this design's choosing. Analog values are millivolts
// and microamps.
module target1_asic
  import target_pkg::*;
(
  input  logic        clk,            // clock for the trigger width counter
  input  logic        rst_n,
  input  ua_t         i_ua [NUM_CH],  // sensor currents
  input  mv_t         vped_mv,
  input  mv_t         vthr_mv,        // trigger threshold
  input  logic [2:0]  sel_term,
  input  logic [6:0]  sel_row,
  input  logic [4:0]  sel_col,
  input  logic [9:0]  smpl_ctrl,
  input  logic        trig_falling,
  input  logic        trig_out_inv,
  input  logic [5:0]  trig_width,
  input  logic        ramp_en,
  input  logic        ramp_clr,
  input  logic [3:0]  adc_bits,       // ramp speed setting
  input  logic [11:0] rovdd_code,
  output logic [15:0] wilk_out_top,
  output logic [15:0] wilk_out_bot,
  output logic        dhit,
  output logic        rco
);

  mv_t                  v_mv [NUM_CH];
  mv_t                  top_mv [BLOCK_CELLS];
  mv_t                  bot_mv [BLOCK_CELLS];
  logic [NUM_CH-1:0]    hit;
  logic [NUM_ROWS-1:0]  row_sel;
  logic [NUM_COLS-1:0]  col_sel;
  logic [NUM_PAIRS-1:0] pair_sel;
  logic                 smp_clk;
  logic                 any_hit;
  real                  f_gsps;

  input_termination_model u_term (
    .i_ua, .sel_term, .vped_mv, .vout_mv(v_mv));

  sample_timing_model u_timing (
    .rovdd_code, .smp_clk, .rco, .f_gsps);

  storage_array_model u_sca (
    .smp_clk, .smpl_ctrl, .vin_mv(v_mv), .row_sel, .col_sel, .pair_sel,
    .top_mv, .bot_mv);

  trigger_comparator_model u_cmp (
    .vin_mv(v_mv), .vthr_mv, .falling(trig_falling), .hit);

  trigger_logic u_trig (
    .clk, .rst_n, .hit, .out_inv(trig_out_inv), .width(trig_width), .dhit, .any_hit);

  block_decoder u_dec (
    .sel_row, .sel_col, .row_sel, .col_sel, .pair_sel);

  wilkinson_ramp_model u_ramp (
    .ramp_en, .ramp_clr, .adc_bits, .top_mv, .bot_mv, .wilk_out_top, .wilk_out_bot);

endmodule
