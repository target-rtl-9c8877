`timescale 1ns/1ps
// tb_block_decoder: exhaustive check of the block decoder. Every Sel_Row /
// Sel_Col combination is applied and the one-hot row, column and pair
// selects are compared with values computed here from the field layout
// (Sel_Row[2:0] row, [5:3] pair, [6] enable).
module tb_block_decoder;
  import target_pkg::*;
  logic [6:0] sel_row;
  logic [4:0] sel_col;
  logic [7:0] row_sel, pair_sel;
  logic [31:0] col_sel;
  int checks = 0, failures = 0;

  block_decoder dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 128; r++)
      for (int c = 0; c < 32; c++) begin
        logic [7:0] er, ep; logic [31:0] ec;
        sel_row = 7'(r); sel_col = 5'(c);
        #1;
        er = '0; ep = '0; ec = '0;
        if (r >= 64) begin
          er = 8'd1 << (r % 8);
          ep = 8'd1 << ((r / 8) % 8);
          ec = 32'd1 << c;
        end
        checks++;
        if (row_sel !== er || pair_sel !== ep || col_sel !== ec) begin
          failures++;
          if (failures < 5) $display("mismatch r=%0d c=%0d row=%b pair=%b col=%h", r, c, row_sel, pair_sel, col_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
