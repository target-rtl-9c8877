`timescale 1ns/1ps
// tb_sampling_freq_loop: closes the loop around a simple oscillator whose
// rate rises with the DAC code (1 GSa/s at code 3203, 2.5 GSa/s per volt on a
// 2.5 V 12-bit DAC, ripple output at 1/64 of it). Starting 8 % slow, the loop
// must lock within 30 windows to 288 edges per 4096 cycles, i.e. within
// about 0.4 % of 1 GSa/s; then a step change in the oscillator (as from
// temperature) must be corrected again.
module tb_sampling_freq_loop;
  localparam real TCLK = 4.494;
  logic clk = 0, rst_n = 0, enable = 1, rco = 0;
  logic [11:0] dac_code;
  logic locked;
  logic [15:0] measured;
  real offset_ghz = -0.08;
  int checks = 0, failures = 0;

  sampling_freq_loop dut (.*);
  always #(TCLK/2) clk = ~clk;

  function automatic real f_of(logic [11:0] c);
    return 1.0 + (real'(c) * 2500.0 / 4096.0 - 1955.0) / 1000.0 * 2.5 + offset_ghz;
  endfunction

  initial forever #(32.0 / f_of(dac_code)) rco = ~rco;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wait_lock(output int windows);
    windows = 0;
    do begin repeat (4096) @(posedge clk); windows++; end while (!locked && windows < 40);
  endtask

  initial begin
    int w;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (4096) @(posedge clk);
    check(!locked, "not locked at start");
    wait_lock(w);
    check(w < 30, $sformatf("lock after %0d windows", w));
    check(f_of(dac_code) > 0.99 && f_of(dac_code) < 1.01, $sformatf("locked rate %f", f_of(dac_code)));
    repeat (3) begin
      repeat (4096) @(posedge clk);
      check(measured >= 287 && measured <= 289, $sformatf("measured %0d", measured));
    end
    offset_ghz = 0.05;
    repeat (8192) @(posedge clk);
    wait_lock(w);
    check(w < 30 && f_of(dac_code) > 0.99 && f_of(dac_code) < 1.01, "relock after drift");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
