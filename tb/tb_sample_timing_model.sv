`timescale 1ns/1ps
// tb_sample_timing_model: sets several ROVDD codes and measures the sampling
// strobe and ripple oscillator periods: 1 GSa/s at 1.955 V, linear
// 2.5 GSa/s per volt, clamped to 0.7..2.3 GSa/s, ripple at 1/64.
module tb_sample_timing_model;
  logic [11:0] rovdd_code = 12'd3203;
  logic smp_clk, rco;
  real f_gsps;
  int checks = 0, failures = 0;

  sample_timing_model dut (.*);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic measure(input int code);
    realtime t0, t1, r0, r1;
    real v, e;
    rovdd_code = 12'(code);
    repeat (4) @(posedge smp_clk);
    t0 = $realtime; repeat (100) @(posedge smp_clk); t1 = $realtime;
    @(posedge rco); r0 = $realtime; @(posedge rco); r1 = $realtime;
    v = real'(code) * 2500.0 / 4096.0;
    e = 1.0 + (v - 1955.0) / 1000.0 * 2.5;
    if (e < 0.7) e = 0.7;
    if (e > 2.3) e = 2.3;
    checks += 2;
    if ((100.0 / (t1 - t0)) < e * 0.99 || (100.0 / (t1 - t0)) > e * 1.01) begin
      failures++; $display("FAIL code %0d rate %f expected %f", code, 100.0 / (t1 - t0), e);
    end
    if ((64.0 / (r1 - r0)) < e * 0.98 || (64.0 / (r1 - r0)) > e * 1.02) begin
      failures++; $display("FAIL code %0d rco rate %f", code, 64.0 / (r1 - r0));
    end
  endtask

  initial begin
    measure(3203);
    measure(3000);
    measure(3400);
    measure(2500);
    measure(4000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
