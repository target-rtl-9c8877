`timescale 1ns/1ps
// block_decoder: the "Decode" block of TARGET 1, which selects the block of
// the storage array that the two banks of Wilkinson ramps digitize.
//
// The FPGA addresses a block with Sel_Row[6:0] and Sel_Col[4:0]. The paper
// says 3 bits of Sel_Row give the row and 3 bits the channel pair (channels
// p and p+8), and Sel_Col gives the column. Which bits are which, and the use
// of the remaining Sel_Row bit, are not given; this design takes
// Sel_Row[2:0] = row, Sel_Row[5:3] = pair, and Sel_Row[6] = read enable
// (no select line is driven while it is 0).
//
// Outputs are one-hot select lines for row, column and pair, as the word and
// bit lines of the array would be driven. Purely combinational.
module block_decoder
  import target_pkg::*;
(
  input  logic [6:0]           sel_row,
  input  logic [4:0]           sel_col,
  output logic [NUM_ROWS-1:0]  row_sel,
  output logic [NUM_COLS-1:0]  col_sel,
  output logic [NUM_PAIRS-1:0] pair_sel
);

  always_comb begin
    row_sel  = '0;
    col_sel  = '0;
    pair_sel = '0;
    if (sel_row[6]) begin
      row_sel[sel_row[2:0]]  = 1'b1;
      pair_sel[sel_row[5:3]] = 1'b1;
      col_sel[sel_col]       = 1'b1;
    end
  end

endmodule
