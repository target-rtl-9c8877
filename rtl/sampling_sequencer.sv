`timescale 1ns/1ps
// sampling_sequencer: the FPGA state machine that drives sampling of the
// TARGET 1 switched capacitor array.
//
// Sampling walks through the 8 capacitor rows one at a time, 512 ns per row
// at 1 GSa/s; inside a row the chip's own timing generator steps from cell to
// cell. Each row has an enable line; even rows share one write strobe and
// odd rows another, so the sequencer asserts the enable of the current row
// and the strobe of its parity (SmplCtrl[7:0] = enables, [8] = even strobe,
// [9] = odd strobe; this bit order is this design's choice).
//
// The FPGA has no view of the analog cell pointer, so it keeps time with a
// picosecond accumulator: every clock adds CLK_PS, and each BLOCK_PS
// (16 samples) advances the column estimate; 32 columns make a row. The
// block being written, {row, column}, is reported to the digitization
// controller so it can place the capture window.
//
// Modes (paper): standard mode uses all 4096 cells as one ring and stops
// sampling while digitizing ("hold"). Multi-hit mode splits the array in two
// 2048-cell halves; sampling wraps inside one half and a "swap" pulse moves
// it to the other half so the first can be digitized while sampling goes on.
// The halves being rows 0-3 and rows 4-7, resuming at column 0 of the held
// row after a hold, and starting a half at its first row after a swap are
// this design's choices.
//
// Timing: outputs are registered; a hold or swap takes effect on the next
// clock edge.
module sampling_sequencer
  import target_pkg::*;
#(
  parameter int unsigned CLK_PS   = 4494,    // FPGA clock period (222.5 MHz)
  parameter int unsigned BLOCK_PS = 16000    // 16 samples at 1 GSa/s
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,         // sampling enabled at all
  input  logic       multi_hit,
  input  logic       hold,        // standard mode: stop while digitizing
  input  logic       swap,        // multi-hit: move to the other half
  output logic [9:0] smpl_ctrl,
  output block_id_t  cur_block,
  output logic       cur_half,
  output logic       sampling,
  output logic       row_wrap     // one-clock pulse when the row changes
);

  row_t  row;
  col_t  col;
  logic [31:0] acc;          // picoseconds into the current block
  logic  active;

  assign active = run && !hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row      <= '0;
      col      <= '0;
      acc      <= '0;
      sampling <= 1'b0;
      row_wrap <= 1'b0;
    end else begin
      row_wrap <= 1'b0;
      sampling <= active;
      if (multi_hit && swap) begin
        row <= {~row[2], 2'b00};
        col <= '0;
        acc <= '0;
        row_wrap <= 1'b1;
      end else if (!active) begin
        // resume at the start of the held row
        col <= '0;
        acc <= '0;
      end else if (acc + CLK_PS >= BLOCK_PS) begin
        acc <= acc + CLK_PS - BLOCK_PS;
        col <= col + 1'b1;
        if (col == col_t'(NUM_COLS-1)) begin
          row_wrap <= 1'b1;
          if (multi_hit) row <= {row[2], row[1:0] + 2'd1};
          else           row <= row + 1'b1;
        end
      end else begin
        acc <= acc + CLK_PS;
      end
    end
  end

  always_comb begin
    smpl_ctrl = '0;
    if (sampling) begin
      smpl_ctrl[{1'b0, row}]       = 1'b1;
      smpl_ctrl[{3'b100, row[0]}] = 1'b1;
    end
  end

  assign cur_block = {row, col};
  assign cur_half  = row[2];

  // exactly one row enable and one strobe while sampling
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    sampling |-> ($onehot(smpl_ctrl[7:0]) && $onehot(smpl_ctrl[9:8])));

endmodule
