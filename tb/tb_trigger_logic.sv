`timescale 1ns/1ps
// tb_trigger_logic: checks the chip trigger: any one of the 16 comparators
// starts a pulse, the pulse lasts the programmed number of cycles, starts
// 3 clock edges after the comparator, is not retriggered while high, and
// follows the output polarity setting.
module tb_trigger_logic;
  import target_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] hit = '0;
  logic out_inv = 0;
  logic [5:0] width = 6'd5;
  logic dhit, any_hit;
  int checks = 0, failures = 0;

  trigger_logic dut (.*);
  always #2.247 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // fire channel ch, return number of cycles until dhit != out_inv and pulse length
  task automatic fire(input int ch, input int w, input bit inv, output int lat, output int len);
    width = 6'(w); out_inv = inv;
    @(negedge clk); hit[ch] = 1'b1;
    lat = 0; len = 0;
    while (dhit == inv && lat < 20) begin @(posedge clk); #0.1; lat++; end
    while (dhit != inv && len < 80) begin @(posedge clk); #0.1; len++; end
    hit[ch] = 1'b0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lat, len;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    check(dhit == 1'b0, "idle low");
    for (int ch = 0; ch < 16; ch++) begin
      int w = 1 + (ch * 3) % 40;
      fire(ch, w, 1'b0, lat, len);
      check(lat == 3, $sformatf("latency ch%0d = %0d", ch, lat));
      check(len == w, $sformatf("width ch%0d %0d != %0d", ch, len, w));
    end
    // inverted output
    fire(7, 9, 1'b1, lat, len);
    check(len == 9 && lat == 3, "inverted pulse");
    out_inv = 1; #1; check(dhit == 1'b1, "inverted idle high");
    out_inv = 0; #1;
    // no retrigger: a second comparator edge inside the pulse is ignored
    width = 6'd20;
    @(negedge clk); hit[0] = 1;
    repeat (6) @(posedge clk); hit[0] = 0; @(negedge clk); hit[1] = 1;
    begin
      int n = 0;
      repeat (40) begin @(posedge clk); #0.1; if (dhit) n++; end
      // pulse is high after clock edges 3..22; counting starts at edge 7
      check(n == 16, $sformatf("no retrigger, high %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
