`timescale 1ns/1ps
// tb_sampling_sequencer: checks the row sequence of the sampling state
// machine at 222.5 MHz: one row enable and the strobe of its parity at a
// time, rows in order 0..7 and around, 512 ns per row, columns every 16 ns,
// sampling stopped during hold and resumed at column 0, and in multi-hit mode
// sampling confined to one half and moved by swap.
module tb_sampling_sequencer;
  import target_pkg::*;
  logic clk = 0, rst_n = 0;
  logic run = 1, multi_hit = 0, hold = 0, swap = 0;
  logic [9:0] smpl_ctrl;
  block_id_t cur_block;
  logic cur_half, sampling, row_wrap;
  int checks = 0, failures = 0;

  sampling_sequencer dut (.*);
  always #2.247 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int row_of(logic [9:0] s);
    for (int r = 0; r < 8; r++) if (s[r]) return r;
    return -1;
  endfunction

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int prev_row, r, nchg;
    realtime t_last;
    repeat (3) @(posedge clk); rst_n = 1;
    @(posedge clk); #0.1;
    prev_row = row_of(smpl_ctrl); t_last = $realtime; nchg = 0;
    check(prev_row == 0, "starts in row 0");
    // three full turns of the ring
    repeat (3 * 8 * 115) begin
      @(posedge clk); #0.1;
      r = row_of(smpl_ctrl);
      check($onehot(smpl_ctrl[7:0]) && smpl_ctrl[8] == (r % 2 == 0) && smpl_ctrl[9] == (r % 2 == 1), "one enable, matching strobe");
      check(cur_block[7:5] == 3'(r), "cur_block row");
      if (r != prev_row) begin
        real dt;
        dt = $realtime - t_last;
        check(r == (prev_row + 1) % 8, $sformatf("row order %0d->%0d", prev_row, r));
        if (nchg++ > 0)
          check(dt > 512.0 - 4.5 && dt < 512.0 + 4.5, $sformatf("row time %0.1f ns", dt));
        prev_row = r; t_last = $realtime;
      end
    end
    // hold stops sampling, resume at column 0 of the same row
    @(negedge clk); hold = 1; r = row_of(smpl_ctrl);
    repeat (3) @(posedge clk); #0.1;
    check(smpl_ctrl == '0, "hold stops sampling");
    repeat (50) @(posedge clk); #0.1;
    check(smpl_ctrl == '0 && cur_block[4:0] == 0, "held, column reset");
    @(negedge clk); hold = 0;
    repeat (2) @(posedge clk); #0.1;
    check(row_of(smpl_ctrl) == r && cur_block[4:0] == 0, "resume in held row, column 0");
    // columns advance every 16 ns
    begin
      realtime t0; int c0;
      c0 = int'(cur_block[4:0]);
      @(posedge clk); #0.1; t0 = $realtime;
      while (int'(cur_block[4:0]) < c0 + 10) begin @(posedge clk); #0.1; end
      check(($realtime - t0) > 140.0 && ($realtime - t0) < 165.0, "10 columns ~160 ns");
    end
    // multi-hit: stay in the half
    @(negedge clk); multi_hit = 1; swap = 1; @(negedge clk); swap = 0;
    #0.1;
    begin
      int h; h = cur_half;
      check(cur_block[4:0] == 0 && cur_block[6:5] == 0, "swap starts a half at its first row");
      repeat (10 * 115) begin
        @(posedge clk); #0.1;
        check(cur_half == h && smpl_ctrl[7:0] != 0 && ((row_of(smpl_ctrl) / 4) == h), "confined to half");
      end
      @(negedge clk); swap = 1; @(negedge clk); swap = 0;
      repeat (2) @(posedge clk); #0.1;
      check(cur_half != h && row_of(smpl_ctrl) == (h ? 0 : 4), "swap to the other half");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
