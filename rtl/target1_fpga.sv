`timescale 1ns/1ps
// target1_fpga: the logic of the companion FPGA that runs one TARGET 1 chip
// (the chip needs it for all configuration and control).
//
// It holds the sampling sequencer (row enables and write strobes), the
// sampling frequency loop (ROVDD DAC from the ripple oscillator), the
// digitization controller (trigger to window, Sel_Row/Sel_Col, ramp control),
// the 32 Wilkinson counters, and the event buffer read by data acquisition
// over DataBus. Configuration (cfg) would be written by data acquisition
// software over USB; the USB controller itself is outside this design, so
// cfg is a plain input and the buffer's read side is brought out.
//
// glob_trig_out forwards the chip trigger to a higher-level trigger, and
// ext_trig is the trigger coming back from it; the paper names a 4-bit
// ClkGlobTrig bus for this without defining its bits.
module target1_fpga
  import target_pkg::*;
#(
  parameter int unsigned CLK_PS    = 4494,
  parameter int unsigned BLOCK_PS  = 16000,
  parameter int unsigned BUF_DEPTH = 1024,
  parameter int unsigned FREQ_WINDOW_CLKS  = 4096,
  parameter int unsigned FREQ_TARGET_COUNT = 288
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  // chip side
  input  logic        dhit,
  input  logic        rco,
  input  logic [15:0] wilk_out_top,
  input  logic [15:0] wilk_out_bot,
  output logic [9:0]  smpl_ctrl,
  output logic [6:0]  sel_row,
  output logic [4:0]  sel_col,
  output logic        ramp_en,
  output logic        ramp_clr,
  output logic [11:0] rovdd_code,
  // trigger network side
  input  logic        ext_trig,
  output logic        glob_trig_out,
  // data acquisition side
  input  logic        rd_en,
  output logic [31:0] rd_data,
  output logic        rd_valid,
  output logic        buf_empty,
  // status
  output logic        busy,
  output logic        freq_locked,
  output logic [15:0] n_events,
  output logic [15:0] n_dropped,
  output logic [15:0] n_stalls,
  output logic [15:0] n_swaps,
  output block_id_t   cur_block
);

  logic        hold, swap, cur_half, sampling, row_wrap;
  logic        cnt_start, cnt_done, cnt_running;
  adc_t        max_count;
  adc_t        codes [2*BLOCK_CELLS];
  logic        wr_en, buf_full;
  logic [31:0] wr_data;
  logic [$clog2(BUF_DEPTH+1)-1:0] buf_count, buf_free;
  logic [15:0] freq_measured;

  assign glob_trig_out = dhit ^ cfg.trig_out_inv;

  sampling_sequencer #(.CLK_PS(CLK_PS), .BLOCK_PS(BLOCK_PS)) u_seq (
    .clk, .rst_n, .run(1'b1), .multi_hit(cfg.multi_hit), .hold, .swap,
    .smpl_ctrl, .cur_block, .cur_half, .sampling, .row_wrap);

  sampling_freq_loop #(.WINDOW_CLKS(FREQ_WINDOW_CLKS), .TARGET_COUNT(FREQ_TARGET_COUNT)) u_freq (
    .clk, .rst_n, .enable(cfg.freq_lock_en), .rco, .dac_code(rovdd_code),
    .locked(freq_locked), .measured(freq_measured));

  digitization_controller u_ctrl (
    .clk, .rst_n, .cfg, .dhit, .ext_trig, .cur_block,
    .sel_row, .sel_col, .ramp_en, .ramp_clr, .hold, .swap,
    .cnt_start, .max_count, .cnt_done, .code(codes),
    .wr_en, .wr_data, .wr_free(12'(buf_free)),
    .busy, .n_events, .n_dropped, .n_stalls, .n_swaps);

  wilkinson_counter #(.N(2*BLOCK_CELLS)) u_cnt (
    .clk, .rst_n, .start(cnt_start), .max_count,
    .stop({wilk_out_bot, wilk_out_top}), .running(cnt_running), .done(cnt_done),
    .code(codes));

  event_buffer #(.WIDTH(32), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .wr_en, .wr_data, .rd_en, .rd_data, .rd_valid,
    .empty(buf_empty), .full(buf_full), .count(buf_count), .wr_free(buf_free));

endmodule
