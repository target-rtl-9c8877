`timescale 1ns/1ps
// tb_digitization_controller: drives the readout state machine with a
// stand-in for the Wilkinson counters (done 20 cycles after start, codes
// that encode the selected row, column, pair and cell) and a free-space
// input for the event buffer. For each event it checks the header, the
// order of the n_blocks x 8 conversions (pairs outer, blocks inner, window
// starting lookback blocks before the trigger block and wrapping in the
// array or, in multi-hit mode, in the half), every data word, hold in
// standard mode and swap in multi-hit mode, dropped triggers while busy, a
// stall on a full buffer, the external trigger path and max_count.
module tb_digitization_controller;
  import target_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic dhit = 0, ext_trig = 0;
  block_id_t cur_block = 8'd40;
  logic [6:0] sel_row;
  logic [4:0] sel_col;
  logic ramp_en, ramp_clr, hold, swap, cnt_start, cnt_done = 0;
  adc_t max_count;
  adc_t code [2*BLOCK_CELLS];
  logic wr_en;
  logic [31:0] wr_data;
  logic [11:0] wr_free = 12'd1024;
  logic busy;
  logic [15:0] n_events, n_dropped, n_stalls, n_swaps;
  int checks = 0, failures = 0;
  logic [31:0] words[$];
  int starts = 0, holds = 0, swaps = 0;

  digitization_controller dut (.*);
  always #2.247 clk = ~clk;

  function automatic adc_t code_of(logic [6:0] sr, logic [4:0] sc, int i);
    return adc_t'((int'(sr[5:0]) * 97 + int'(sc) * 13 + i * 5) % 4096);
  endfunction

  // counter stand-in
  always @(posedge clk) begin
    if (cnt_start) begin
      cnt_done <= 1'b0;
      starts++;
      fork begin
        repeat (20) @(posedge clk);
        cnt_done <= 1'b1;
      end join_none
    end
  end
  always_comb for (int i = 0; i < 2*BLOCK_CELLS; i++) code[i] = bin2gray(code_of(sel_row, sel_col, i));

  always @(negedge clk) if (wr_en) words.push_back(wr_data);
  always @(negedge clk) if (swap) swaps++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic run_event(input bit use_ext, input block_id_t trig_blk, input bit mh, input int nb);
    block_id_t first;
    int n0, t0, cyc;
    cfg.multi_hit = mh;
    cfg.n_blocks = 4'(nb);
    cur_block = trig_blk;
    words.delete();
    n0 = int'(n_events);
    @(negedge clk);
    if (use_ext) ext_trig = 1; else dhit = 1;
    @(negedge clk);
    check(busy, "busy after trigger");
    check(mh ? !hold : hold, "hold only in standard mode");
    // a second trigger while busy is dropped
    repeat (3) @(negedge clk);
    if (use_ext) ext_trig = 0; else dhit = 0;
    repeat (3) @(negedge clk);
    begin int d0 = int'(n_dropped);
      if (use_ext) ext_trig = 1; else dhit = 1;
      @(negedge clk); if (use_ext) ext_trig = 0; else dhit = 0;
      @(negedge clk); check(int'(n_dropped) == d0 + 1, "trigger while busy dropped");
    end
    cyc = 0;
    while (busy && cyc < 100000) begin @(negedge clk); cyc++; end
    repeat (2) @(negedge clk);
    check(!hold && int'(n_events) == n0 + 1, "event done, hold released");
    check(words.size() == 1 + 8 * nb * 16, $sformatf("word count %0d", words.size()));
    first = block_sub(trig_blk, int'(cfg.lookback), mh);
    check(words[0][31:28] == HDR_TAG && words[0][19:12] == first && words[0][11:8] == 4'(nb)
          && words[0][7:4] == cfg.adc_bits && words[0][3] == use_ext && words[0][2] == mh, "header");
    for (int p = 0; p < 8; p++)
      for (int k = 0; k < nb; k++) begin
        block_id_t b = block_add(first, k, mh);
        logic [6:0] sr = {1'b1, 3'(p), b[7:5]};
        for (int i = 0; i < 16; i++) begin
          int idx = 1 + (p * nb + k) * 16 + i;
          logic [31:0] e = {1'b1, 3'(p), code_of(sr, b[4:0], 16 + i), 1'b0, 3'(p), code_of(sr, b[4:0], i)};
          if (idx < words.size()) check(words[idx] == e, $sformatf("word p%0d k%0d i%0d %h != %h", p, k, i, words[idx], e));
        end
      end
  endtask

  initial begin
    cfg = '0;
    cfg.int_trig_en = 1; cfg.ext_trig_en = 1;
    cfg.adc_bits = 4'd12; cfg.lookback = 8'd3; cfg.n_blocks = 4'd4;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    check(max_count == 12'd4095, "max_count 12 bit");
    run_event(0, 8'd40, 0, 4);              // plain window
    run_event(1, 8'd1, 0, 3);               // wraps below block 0, external trigger
    cfg.lookback = 8'd5;
    run_event(0, 8'd130, 1, 4);             // multi-hit: wraps within upper half
    check(swaps == 1 && n_swaps == 1, "swap pulsed once");
    cfg.adc_bits = 4'd9; #1;
    check(max_count == 12'd511, "max_count 9 bit");
    // internal trigger disabled: ignored
    cfg.int_trig_en = 0;
    @(negedge clk); dhit = 1; repeat (3) @(negedge clk); dhit = 0; repeat (3) @(negedge clk);
    check(!busy, "disabled internal trigger ignored");
    cfg.int_trig_en = 1;
    // stall: buffer nearly full
    wr_free = 12'd10;
    begin int s0, w0; s0 = int'(n_stalls);
      @(negedge clk); dhit = 1; @(negedge clk); dhit = 0;
      repeat (200) @(negedge clk);
      w0 = words.size();
      check(int'(n_stalls) == s0 + 1 && busy, "stall on full buffer");
      repeat (100) @(negedge clk);
      check(words.size() == w0, "no writes while stalled");
      wr_free = 12'd1024;
      while (busy) @(negedge clk);
      check(int'(n_events) == 4, "stalled event completes");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
