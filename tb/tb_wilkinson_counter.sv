`timescale 1ns/1ps
// tb_wilkinson_counter: raises each channel's stop input at a chosen time
// after start and checks that the gray-coded result equals the number of
// clock edges (both edges, 445 MHz) that passed, within one count; that
// channels never stopped read full scale; and that a 12-bit conversion takes
// 2048 cycles (9.2 us at 222.5 MHz) and a 9-bit one 256 cycles.
module tb_wilkinson_counter;
  import target_pkg::*;
  localparam real TCLK = 4.494;
  logic clk = 0, rst_n = 0, start = 0;
  adc_t max_count;
  logic [31:0] stop = '0;
  logic running, done;
  adc_t code [32];
  int checks = 0, failures = 0;

  wilkinson_counter #(.N(32)) dut (.*);
  always #(TCLK/2) clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #400000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic conversion(input int bits);
    int  expect_cnt [32];
    real t_stop [32];
    realtime t0;
    int cycles;
    max_count = adc_t'((1 << bits) - 1);
    for (int i = 0; i < 32; i++) begin
      expect_cnt[i] = (i == 31) ? -1 : int'($urandom % ((1 << bits) - 4)) + 2;
      t_stop[i] = real'(expect_cnt[i]) * TCLK / 2.0 + TCLK * 0.75 + 0.3;
    end
    stop = '0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $realtime - TCLK / 2;   // the edge that saw start
    fork
      for (int i = 0; i < 31; i++) begin
        automatic int k = i;
        fork begin #(t_stop[k] - ($realtime - t0)); stop[k] = 1'b1; end join_none
      end
    join
    cycles = 0;
    while (!done) begin @(posedge clk); cycles++; end
    #0.1;
    check(cycles >= (1 << bits) / 2 && cycles <= (1 << bits) / 2 + 2,
          $sformatf("%0d-bit conversion took %0d cycles", bits, cycles));
    for (int i = 0; i < 32; i++) begin
      int got = int'(gray2bin(code[i]));
      if (i == 31) check(got == (1 << bits) - 1, "unstopped channel reads full scale");
      else check(got >= expect_cnt[i] - 1 && got <= expect_cnt[i] + 1,
                 $sformatf("ch%0d code %0d expected %0d", i, got, expect_cnt[i]));
      check(code[i] == bin2gray(adc_t'(got)), "result is gray coded");
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    conversion(12);
    conversion(9);
    conversion(10);
    conversion(12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
