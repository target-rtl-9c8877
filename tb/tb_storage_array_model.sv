`timescale 1ns/1ps
// tb_storage_array_model: writes a ramp of distinct voltages into rows by
// driving the row enables and write strobes as the FPGA would, then reads
// every block of every channel pair back through the one-hot selects and
// checks each cell. Also checks that a row without its parity strobe, or
// without its enable, is not written.
module tb_storage_array_model;
  import target_pkg::*;
  logic smp_clk = 0;
  logic [9:0] smpl_ctrl = '0;
  mv_t vin_mv [NUM_CH];
  logic [NUM_ROWS-1:0] row_sel = '0;
  logic [NUM_COLS-1:0] col_sel = '0;
  logic [NUM_PAIRS-1:0] pair_sel = '0;
  mv_t top_mv [BLOCK_CELLS], bot_mv [BLOCK_CELLS];
  int n = 0;
  int checks = 0, failures = 0;

  storage_array_model dut (.*);
  always #0.5 smp_clk = ~smp_clk;

  // value stored for channel c at sample number k of row r
  function automatic mv_t val(int c, int r, int k);
    return mv_t'(((r * 512 + k) * 7 + c * 331) % 3000);
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < NUM_ROWS; r++) begin
      int sel_r;
      sel_r = r;
      for (int k = 0; k < 512; k++) begin
        @(negedge smp_clk);
        // row 5 is written with the wrong strobe: must not be stored
        smpl_ctrl = '0;
        smpl_ctrl[sel_r] = 1'b1;
        smpl_ctrl[8 + ((r == 5) ? 0 : r % 2)] = 1'b1;
        for (int c = 0; c < NUM_CH; c++) vin_mv[c] = val(c, r, k);
      end
    end
    @(negedge smp_clk); smpl_ctrl = '0;
    for (int c = 0; c < NUM_CH; c++) vin_mv[c] = 16'd9999;
    repeat (10) @(negedge smp_clk);
    for (int p = 0; p < NUM_PAIRS; p++)
      for (int r = 0; r < NUM_ROWS; r++)
        for (int col = 0; col < NUM_COLS; col++) begin
          pair_sel = 8'd1 << p; row_sel = 8'd1 << r; col_sel = 32'd1 << col;
          #1;
          for (int i = 0; i < BLOCK_CELLS; i++) begin
            mv_t et, eb;
            et = (r == 5) ? 16'd0 : val(p, r, col * 16 + i);
            eb = (r == 5) ? 16'd0 : val(p + 8, r, col * 16 + i);
            checks++;
            if (top_mv[i] !== et || bot_mv[i] !== eb) begin
              failures++;
              if (failures < 5) $display("FAIL p%0d r%0d c%0d i%0d got %0d/%0d exp %0d/%0d", p, r, col, i, top_mv[i], bot_mv[i], et, eb);
            end
          end
        end
    // no valid selection -> zero
    row_sel = 8'b11; #1;
    checks++; if (top_mv[0] != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
