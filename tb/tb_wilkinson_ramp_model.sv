`timescale 1ns/1ps
// tb_wilkinson_ramp_model: gives the 32 comparators known cell voltages,
// runs the ramp and checks that each comparator output rises at
// (V - Vstart) / slope after the ramp starts (slope 0.681 mV per 2.247 ns at
// 12 bits, 4x faster at 10 bits), and that clearing the ramp drops them.
module tb_wilkinson_ramp_model;
  import target_pkg::*;
  logic ramp_en = 0, ramp_clr = 1;
  logic [3:0] adc_bits = 4'd12;
  mv_t top_mv [BLOCK_CELLS], bot_mv [BLOCK_CELLS];
  logic [15:0] wilk_out_top, wilk_out_bot;
  realtime t_rise [32];
  int checks = 0, failures = 0;

  wilkinson_ramp_model dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  for (genvar i = 0; i < 16; i++) begin : g_mon
    always @(posedge wilk_out_top[i]) t_rise[i] = $realtime;
    always @(posedge wilk_out_bot[i]) t_rise[16 + i] = $realtime;
  end

  task automatic run(input int bits);
    realtime t0;
    adc_bits = 4'(bits);
    for (int i = 0; i < 16; i++) begin
      top_mv[i] = mv_t'(300 + $urandom % 1500);
      bot_mv[i] = mv_t'(300 + $urandom % 1500);
    end
    for (int i = 0; i < 32; i++) t_rise[i] = 0;
    #10; ramp_clr = 0; ramp_en = 1; t0 = $realtime;
    #(9300.0 / real'(1 << (12 - bits)));
    for (int i = 0; i < 32; i++) begin
      real v, e;
      v = (i < 16) ? real'(top_mv[i]) : real'(bot_mv[i - 16]);
      e = (v + 40.0) / (0.681 / 2.2472 * real'(1 << (12 - bits)));
      checks++;
      if ((t_rise[i] - t0) < e - 0.5 || (t_rise[i] - t0) > e + 0.5) begin
        failures++;
        $display("FAIL bits %0d comparator %0d rose at %f expected %f", bits, i, t_rise[i] - t0, e);
      end
    end
    ramp_en = 0; ramp_clr = 1; #1;
    checks++;
    if (wilk_out_top != 0 || wilk_out_bot != 0) failures++;
  endtask

  initial begin
    run(12);
    run(10);
    run(9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
