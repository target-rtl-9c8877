`timescale 1ns/1ps
// tb_event_buffer: random writes and reads against a queue reference,
// including filling the buffer completely; checks data order, one-cycle
// read latency, count/free/empty/full.
module tb_event_buffer;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0, rd_valid, empty, full;
  logic [31:0] wr_data = '0, rd_data;
  logic [6:0] count, wr_free;
  logic [31:0] q[$];
  int checks = 0, failures = 0;

  event_buffer #(.WIDTH(32), .DEPTH(64)) dut (.*);
  always #2 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic exp_valid = 0; logic [31:0] exp_data;
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int phase = 0; phase < 3; phase++)
      for (int i = 0; i < 1500; i++) begin
        @(negedge clk);
        if (rd_valid || exp_valid) check(rd_valid == exp_valid && rd_data == exp_data, "read data");
        check(count == 7'(q.size()) && wr_free == 7'(64 - q.size()), "count");
        check(empty == (q.size() == 0) && full == (q.size() == 64), "flags");
        // phase 0 fills, phase 1 drains, phase 2 random
        wr_en = (phase == 0) ? ($urandom % 4 != 0) : (phase == 1) ? ($urandom % 4 == 0) : $urandom % 2;
        rd_en = (phase == 0) ? ($urandom % 4 == 0) : (phase == 1) ? ($urandom % 4 != 0) : $urandom % 2;
        if (full) wr_en = 0;
        if (empty) rd_en = 0;
        wr_data = $urandom;
        exp_valid = 0;
        if (rd_en) begin exp_data = q.pop_front(); exp_valid = 1; end
        if (wr_en) q.push_back(wr_data);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
