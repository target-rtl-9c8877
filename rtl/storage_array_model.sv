`timescale 1ns/1ps
// storage_array_model: BEHAVIOURAL MODEL (not synthesizable logic) of the
// TARGET 1 switched capacitor array, 16 channels x 4096 analog cells.
//
// Per channel the cells form 8 rows of 512; a row is written only while its
// enable is high and the write strobe of its parity (even or odd rows) is
// active (paper). Inside a row the chip's timing generator moves from cell to
// cell on each sampling strobe; the model keeps one cell pointer per row that
// restarts at cell 0 when the row enable rises and stops at cell 511. On
// each rising edge of smp_clk every writing row stores the 16 input voltages.
//
// Readout: the one-hot row, column and pair selects from the decoder connect
// the 16 cells of the selected block of channel p to the top ramp bank and
// those of channel p+8 to the bottom bank. With no valid selection the
// outputs are 0. Voltages are whole millivolts. Cells start at 0 mV.
module storage_array_model
  import target_pkg::*;
(
  input  logic                 smp_clk,
  input  logic [9:0]           smpl_ctrl,   // [7:0] row enables, [8] even, [9] odd strobe
  input  mv_t                  vin_mv [NUM_CH],
  input  logic [NUM_ROWS-1:0]  row_sel,
  input  logic [NUM_COLS-1:0]  col_sel,
  input  logic [NUM_PAIRS-1:0] pair_sel,
  output mv_t                  top_mv [BLOCK_CELLS],
  output mv_t                  bot_mv [BLOCK_CELLS]
);

  real        cells [NUM_CH][CH_CELLS];   // analog cell voltages, mV (start at 0)
  logic [9:0] ptr [NUM_ROWS] = '{default: '0};   // 0..512, 512 = row full
  logic [7:0] en_q = '0;

  always @(posedge smp_clk) begin
    for (int r = 0; r < NUM_ROWS; r++) begin
      if (smpl_ctrl[r] && !en_q[r]) ptr[r] = '0;
      if (smpl_ctrl[r] && smpl_ctrl[8 + (r % 2)] && ptr[r] < 10'(ROW_CELLS)) begin
        for (int c = 0; c < NUM_CH; c++) cells[c][r*ROW_CELLS + int'(ptr[r])] = real'(vin_mv[c]);
        ptr[r] = ptr[r] + 1'b1;
      end
    end
    en_q = smpl_ctrl[7:0];
  end

  always_comb begin
    int row, col, pair;
    logic ok;
    row = 0; col = 0; pair = 0;
    for (int i = 0; i < NUM_ROWS; i++)  if (row_sel[i])  row  = i;
    for (int i = 0; i < NUM_COLS; i++)  if (col_sel[i])  col  = i;
    for (int i = 0; i < NUM_PAIRS; i++) if (pair_sel[i]) pair = i;
    ok = $onehot(row_sel) && $onehot(col_sel) && $onehot(pair_sel);
    for (int i = 0; i < BLOCK_CELLS; i++) begin
      top_mv[i] = ok ? mv_t'(int'(cells[pair][row*ROW_CELLS + col*BLOCK_CELLS + i])) : '0;
      bot_mv[i] = ok ? mv_t'(int'(cells[pair + NUM_PAIRS][row*ROW_CELLS + col*BLOCK_CELLS + i])) : '0;
    end
  end

endmodule
