`timescale 1ns/1ps
// digitization_controller: the FPGA state machine that turns a trigger into
// a digitized event.
//
// TARGET 1 samples continuously; digitization happens only on a trigger,
// either the chip's own (DHIT) or an external one from a higher-level trigger.
// The capture window is n_blocks consecutive 16-sample blocks (the paper
// tests 3 and 4), and a trigger digitizes all 16 channels. The two ramp
// banks convert one block of a channel pair (p, p+8) at a time, so an event
// takes n_blocks x 8 conversions; at 12 bits this is 4 x 8 x 9.2 us = 294 us
// of dead time, as the paper computes.
//
// Sequence (state names in the code):
//   IDLE     ramps held cleared; a rising trigger edge latches the block being
//            written (T) and places the window start at T - lookback, in
//            sampling order (block id = row*32 + column, wrapping within the
//            whole array, or within the half in multi-hit mode). Standard
//            mode raises hold to stop sampling; multi-hit mode pulses swap
//            so sampling moves to the other half while this half is read.
//   HEADER   writes one header word.
//   SETUP    drives Sel_Row/Sel_Col for block (start + k) and pair p and
//            waits until the event buffer has room for 16 words (a stall if
//            the data acquisition side is slow).
//   START    releases the ramp clear and pulses the counter start.
//   CONVERT  starts the ramp on the same edge as the counters and waits for
//            the counters to finish.
//   WRITE    stores 16 words, one per cidx: {ch p+8, code, ch p, code}, with
//            the gray code converted to binary.
//   Pairs are the outer loop and blocks the inner loop.
// Triggers that arrive while an event is in progress are counted as dropped.
//
// The paper gives the trigger-to-window selection, window in whole blocks,
// the pair-wise parallel digitization and the two modes. The state sequence,
// the lookback register, the word format and the drop policy are this
// design's own.
module digitization_controller
  import target_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        dhit,          // chip trigger, polarity per cfg
  input  logic        ext_trig,      // external trigger
  input  block_id_t   cur_block,     // block being written
  // decode and ramp control towards the chip
  output logic [6:0]  sel_row,
  output logic [4:0]  sel_col,
  output logic        ramp_en,
  output logic        ramp_clr,
  // sampling control
  output logic        hold,
  output logic        swap,
  // Wilkinson counters
  output logic        cnt_start,
  output adc_t        max_count,
  input  logic        cnt_done,
  input  adc_t        code [2*BLOCK_CELLS],   // [0..15] top bank, [16..31] bottom
  // event buffer
  output logic        wr_en,
  output logic [31:0] wr_data,
  input  logic [11:0] wr_free,
  // status
  output logic        busy,
  output logic [15:0] n_events,
  output logic [15:0] n_dropped,
  output logic [15:0] n_stalls,
  output logic [15:0] n_swaps
);

  typedef enum logic [2:0] {IDLE, HEADER, SETUP, START, CONVERT, WRITE} state_t;
  state_t state;

  logic       trig_lvl, trig_q, trig_rise, ext_sel;
  logic       int_rise, ext_rise, ext_q;
  block_id_t  start_blk, blk;
  logic [2:0] pair;
  logic [3:0] seg;
  logic [3:0] cidx;
  logic       stall_seen;
  logic       mh;            // mode latched for the event

  assign trig_lvl  = cfg.int_trig_en && (dhit ^ cfg.trig_out_inv);
  assign int_rise  = trig_lvl && !trig_q;
  assign ext_rise  = cfg.ext_trig_en && ext_trig && !ext_q;
  assign trig_rise = int_rise || ext_rise;

  assign blk       = block_add(start_blk, int'(seg), mh);
  assign max_count = adc_t'((1 << cfg.adc_bits) - 1);
  assign busy      = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= IDLE;
      trig_q     <= 1'b0;
      ext_q      <= 1'b0;
      start_blk  <= '0;
      pair       <= '0;
      seg        <= '0;
      cidx       <= '0;
      hold       <= 1'b0;
      swap       <= 1'b0;
      ramp_en    <= 1'b0;
      ramp_clr   <= 1'b1;
      cnt_start  <= 1'b0;
      wr_en      <= 1'b0;
      wr_data    <= '0;
      sel_row    <= '0;
      sel_col    <= '0;
      n_events   <= '0;
      n_dropped  <= '0;
      n_stalls   <= '0;
      n_swaps    <= '0;
      stall_seen <= 1'b0;
      ext_sel    <= 1'b0;
      mh         <= 1'b0;
    end else begin
      trig_q    <= trig_lvl;
      ext_q     <= ext_trig;
      swap      <= 1'b0;
      cnt_start <= 1'b0;
      wr_en     <= 1'b0;
      if (trig_rise && state != IDLE) n_dropped <= n_dropped + 1'b1;
      unique case (state)
        IDLE: begin
          ramp_en  <= 1'b0;
          ramp_clr <= 1'b1;
          sel_row  <= '0;
          if (trig_rise) begin
            mh        <= cfg.multi_hit;
            start_blk <= block_sub(cur_block, int'(cfg.lookback), cfg.multi_hit);
            ext_sel   <= !int_rise;
            pair      <= '0;
            seg       <= '0;
            if (cfg.multi_hit) begin
              swap    <= 1'b1;
              n_swaps <= n_swaps + 1'b1;
            end else begin
              hold    <= 1'b1;
            end
            state <= HEADER;
          end
        end
        HEADER: begin
          if (wr_free != '0) begin
            wr_en   <= 1'b1;
            wr_data <= {HDR_TAG, n_events[7:0], start_blk, cfg.n_blocks, cfg.adc_bits,
                        ext_sel, mh, 2'b00};
            state   <= SETUP;
          end
        end
        SETUP: begin
          sel_row  <= {1'b1, pair, blk[7:5]};
          sel_col  <= blk[4:0];
          ramp_clr <= 1'b1;
          ramp_en  <= 1'b0;
          if (wr_free >= 12'(BLOCK_CELLS)) begin
            stall_seen <= 1'b0;
            state      <= START;
          end else if (!stall_seen) begin
            stall_seen <= 1'b1;
            n_stalls   <= n_stalls + 1'b1;
          end
        end
        START: begin
          ramp_clr  <= 1'b0;
          cnt_start <= 1'b1;
          state     <= CONVERT;
        end
        CONVERT: begin
          // the ramp starts on the edge at which the counters see start
          if (cnt_start) ramp_en <= 1'b1;
          else if (cnt_done) begin
            ramp_en <= 1'b0;
            cidx    <= '0;
            state   <= WRITE;
          end
        end
        WRITE: begin
          wr_en   <= 1'b1;
          wr_data <= {1'b1, pair, gray2bin(code[BLOCK_CELLS + int'(cidx)]),
                      1'b0, pair, gray2bin(code[int'(cidx)])};
          cidx    <= cidx + 1'b1;
          if (cidx == 4'(BLOCK_CELLS-1)) begin
            ramp_clr <= 1'b1;
            if (seg + 1'b1 < cfg.n_blocks) begin
              seg   <= seg + 1'b1;
              state <= SETUP;
            end else if (pair != 3'(NUM_PAIRS-1)) begin
              seg   <= '0;
              pair  <= pair + 1'b1;
              state <= SETUP;
            end else begin
              hold     <= 1'b0;
              n_events <= n_events + 1'b1;
              sel_row  <= '0;
              state    <= IDLE;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
