`timescale 1ns/1ps
// target1_system: one TARGET 1 chip wired to its companion FPGA, as on the
// evaluation board (top of the design).
//
// The sensor currents, pedestal and threshold voltages enter the chip model;
// the FPGA drives sampling, decode, ramps and ROVDD, counts the Wilkinson
// comparator outputs, and buffers events for data acquisition, which reads
// them through rd_en/rd_data (DataBus). glob_trig_out and ext_trig connect to
// a higher-level trigger. Everything runs from one FPGA clock (222.5 MHz by
// default, counting on both edges); the sampling strobe comes from the
// chip's own timing generator.
module target1_system
  import target_pkg::*;
#(
  parameter int unsigned CLK_PS    = 4494,
  parameter int unsigned BLOCK_PS  = 16000,
  parameter int unsigned BUF_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  ua_t         i_ua [NUM_CH],
  input  mv_t         vped_mv,
  input  mv_t         vthr_mv,
  input  logic        ext_trig,
  output logic        glob_trig_out,
  input  logic        rd_en,
  output logic [31:0] rd_data,
  output logic        rd_valid,
  output logic        buf_empty,
  output logic        busy,
  output logic        freq_locked,
  output logic [15:0] n_events,
  output logic [15:0] n_dropped,
  output logic [15:0] n_stalls,
  output logic [15:0] n_swaps,
  output block_id_t   cur_block
);

  logic        dhit, rco, ramp_en, ramp_clr;
  logic [15:0] wilk_out_top, wilk_out_bot;
  logic [9:0]  smpl_ctrl;
  logic [6:0]  sel_row;
  logic [4:0]  sel_col;
  logic [11:0] rovdd_code;

  target1_asic u_asic (
    .clk, .rst_n, .i_ua, .vped_mv, .vthr_mv, .sel_term(cfg.sel_term),
    .sel_row, .sel_col, .smpl_ctrl, .trig_falling(cfg.trig_falling),
    .trig_out_inv(cfg.trig_out_inv), .trig_width(cfg.trig_width),
    .ramp_en, .ramp_clr, .adc_bits(cfg.adc_bits), .rovdd_code,
    .wilk_out_top, .wilk_out_bot, .dhit, .rco);

  target1_fpga #(.CLK_PS(CLK_PS), .BLOCK_PS(BLOCK_PS), .BUF_DEPTH(BUF_DEPTH)) u_fpga (
    .clk, .rst_n, .cfg, .dhit, .rco, .wilk_out_top, .wilk_out_bot,
    .smpl_ctrl, .sel_row, .sel_col, .ramp_en, .ramp_clr, .rovdd_code,
    .ext_trig, .glob_trig_out, .rd_en, .rd_data, .rd_valid, .buf_empty,
    .busy, .freq_locked, .n_events, .n_dropped, .n_stalls, .n_swaps, .cur_block);

endmodule
