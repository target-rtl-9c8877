`timescale 1ns/1ps
// tb_target1_system: end-to-end test of one TARGET 1 chip with its FPGA at
// the default (full) size: 16 channels x 4096 cells, 12-bit counters at
// 222.5 MHz counting on both edges, 1 GSa/s sampling.
//
// The inputs carry a small triangle wave per channel (distinct phases) on a
// 1.0 V pedestal through the 1 kohm termination. Sequence:
//   1. the sampling frequency loop locks the sampling rate;
//   2. a 400 uA, 20 ns pulse on channel 5 crosses the 1.3 V threshold and the
//      chip's own trigger starts a 12-bit, 4-block event in standard mode;
//   3. an external trigger timed at block 1 gives a 10-bit event whose window
//      wraps from block 254 through block 1;
//   4. multi-hit mode, 9 bits: two external triggers with the data bus not
//      read, so the second event stalls on the full buffer until reading
//      resumes; a trigger during digitization is dropped.
// Every digitized word is checked against the voltage the storage array held
// when the event was triggered, through the ideal ramp transfer function
// (code = (V + 40 mV) / (0.681 mV x 2^(12-bits)), within 2 counts), and the
// digitization time of one event is checked against 4 x 8 x 9.2 us.
module tb_target1_system;
  import target_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  ua_t  i_ua [NUM_CH];
  mv_t  vped_mv = 16'd1000, vthr_mv = 16'd1300;
  logic ext_trig = 0, glob_trig_out;
  logic rd_en = 0, rd_valid, buf_empty, busy, freq_locked;
  logic [31:0] rd_data;
  logic [15:0] n_events, n_dropped, n_stalls, n_swaps;
  block_id_t cur_block;
  int checks = 0, failures = 0;
  int pulse_ch = -1;
  bit reading = 1;
  logic [31:0] stream[$];
  real snap [2][NUM_CH][CH_CELLS];
  // mechanisms seen
  int m_int_trig = 0, m_ext_trig = 0, m_wrap = 0, m_swap = 0, m_drop = 0,
      m_stall = 0, m_lock = 0, m_bits12 = 0, m_bits10 = 0, m_bits9 = 0;

  target1_system dut (.*);
  always #2.247 clk = ~clk;

  // input signals, updated every ns
  initial forever begin
    int t;
    t = int'($time);
    for (int c = 0; c < NUM_CH; c++) begin
      int ph;
      ph = (t + c * 37) % 200;
      i_ua[c] = ua_t'((ph < 100 ? ph : 200 - ph) - 50);
      if (c == pulse_ch) i_ua[c] = 16'sd400;
    end
    #1;
  end

  // data acquisition side
  always @(negedge clk) begin
    if (rd_valid) stream.push_back(rd_data);
    rd_en <= reading && !buf_empty && !rd_en;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #4000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic take_snapshot(input int s);
    repeat (4) @(posedge clk);
    for (int c = 0; c < NUM_CH; c++)
      for (int k = 0; k < CH_CELLS; k++) snap[s][c][k] = dut.u_asic.u_sca.cells[c][k];
  endtask

  // pop one event from the stream and check it against snapshot s
  task automatic check_event(input int s, input bit exp_ext, input bit exp_mh, input int exp_bits,
                             input int pulsed);
    logic [31:0] h;
    block_id_t first;
    int nb, top, nwords;
    int maxc [NUM_CH];
    real lsb;
    check(stream.size() > 0, "event header present");
    if (stream.size() == 0) return;
    h = stream.pop_front();
    first = h[19:12]; nb = int'(h[11:8]);
    check(h[31:28] == HDR_TAG && int'(h[7:4]) == exp_bits && h[3] == exp_ext && h[2] == exp_mh,
          $sformatf("header %h", h));
    if (!exp_mh && int'(first) + nb > NUM_BLOCKS) m_wrap++;
    nwords = 8 * nb * 16;
    check(stream.size() >= nwords, $sformatf("event length %0d", stream.size()));
    if (stream.size() < nwords) return;
    lsb = 0.681 * real'(1 << (12 - exp_bits));
    top = (1 << exp_bits) - 1;
    for (int c = 0; c < NUM_CH; c++) maxc[c] = 0;
    for (int p = 0; p < 8; p++)
      for (int k = 0; k < nb; k++) begin
        block_id_t b;
        b = block_add(first, k, exp_mh);
        for (int i = 0; i < 16; i++) begin
          logic [31:0] w;
          int cix;
          w = stream.pop_front();
          cix = int'(b[7:5]) * ROW_CELLS + int'(b[4:0]) * BLOCK_CELLS + i;
          check(w[31:28] == 4'(p + 8) && w[15:12] == 4'(p), "channel tags");
          for (int half = 0; half < 2; half++) begin
            int ch, got;
            real e;
            ch  = p + 8 * half;
            got = half ? int'(w[27:16]) : int'(w[11:0]);
            e   = (snap[s][ch][cix] + 40.0) / lsb - 1.0;
            if (e > real'(top)) e = real'(top);
            check(real'(got) > e - 2.0 && real'(got) < e + 2.0,
                  $sformatf("ch%0d block %0d cell %0d code %0d expected %0.1f (%0.1f mV, now %0.1f mV)", ch, b, i, got, e, snap[s][ch][cix], dut.u_asic.u_sca.cells[ch][cix]));
            if (got > maxc[ch]) maxc[ch] = got;
          end
        end
      end
    if (pulsed >= 0)
      for (int c = 0; c < NUM_CH; c++) begin
        real thr;
        thr = (1200.0 + 40.0) / lsb;
        check((c == pulsed) == (real'(maxc[c]) > thr), $sformatf("pulse seen only on ch%0d (ch%0d max %0d)", pulsed, c, maxc[c]));
      end
  endtask

  task automatic wait_idle();
    int n;
    n = 0;
    while (busy && n < 400000) begin @(posedge clk); n++; end
    repeat (20) @(posedge clk);
  endtask

  initial begin
    realtime t0;
    int w;
    cfg = '0;
    cfg.int_trig_en = 1; cfg.ext_trig_en = 1; cfg.freq_lock_en = 1;
    cfg.n_blocks = 4'd4; cfg.adc_bits = 4'd12; cfg.lookback = 8'd3;
    cfg.sel_term = 3'b010; cfg.trig_width = 6'd8;
    repeat (5) @(posedge clk); rst_n = 1;
    // 1. frequency lock
    w = 0;
    while (!freq_locked && w < 60) begin repeat (4096) @(posedge clk); w++; end
    check(freq_locked, "sampling frequency locked");
    check(dut.u_asic.u_timing.f_gsps > 0.99 && dut.u_asic.u_timing.f_gsps < 1.01, "locked near 1 GSa/s");
    if (freq_locked) m_lock++;
    repeat (2000) @(posedge clk);
    check(n_events == 0 && !busy, "no trigger from the baseline signal");
    // 2. self trigger, standard mode, 12 bits
    @(negedge clk); pulse_ch = 5;
    #20; pulse_ch = -1;
    wait (busy);
    t0 = $realtime;
    take_snapshot(0);
    check(dut.u_fpga.smpl_ctrl == '0, "sampling held in standard mode");
    wait_idle();
    check(n_events == 1, "self-triggered event");
    // 4 blocks x 8 pairs x 9.2 us = 294 us, plus per-conversion overhead
    check(($realtime - t0) > 294000.0 && ($realtime - t0) < 300000.0,
          $sformatf("12-bit event took %0.1f us", ($realtime - t0) / 1000.0));
    repeat (600) @(posedge clk);
    check_event(0, 0, 0, 12, 5);
    m_int_trig++; m_bits12++;
    // 3. external trigger at block 1: window wraps around the array
    cfg.adc_bits = 4'd10;
    repeat (200) @(posedge clk);
    wait (cur_block == 8'd1);
    @(negedge clk); ext_trig = 1; repeat (4) @(negedge clk); ext_trig = 0;
    wait (busy);
    take_snapshot(0);
    wait_idle();
    repeat (600) @(posedge clk);
    check_event(0, 1, 0, 10, -1);
    m_ext_trig++; m_bits10++;
    // 4. multi-hit, 9 bits, data bus not read: second event stalls
    cfg.multi_hit = 1; cfg.adc_bits = 4'd9;
    reading = 0;
    repeat (1000) @(posedge clk);
    @(negedge clk); ext_trig = 1; repeat (4) @(negedge clk); ext_trig = 0;
    wait (busy);
    take_snapshot(0);
    check(dut.u_fpga.smpl_ctrl != '0, "sampling continues in multi-hit mode");
    check(dut.u_fpga.cur_block[7] != dut.u_fpga.u_ctrl.start_blk[7], "sampling moved to the other half");
    // a trigger during digitization is dropped
    repeat (100) @(posedge clk);
    begin
      int d0;
      d0 = int'(n_dropped);
      @(negedge clk); ext_trig = 1; repeat (4) @(negedge clk); ext_trig = 0;
      repeat (4) @(posedge clk);
      check(int'(n_dropped) == d0 + 1, "trigger during digitization dropped");
      if (int'(n_dropped) > d0) m_drop++;
    end
    wait_idle();
    repeat (3000) @(posedge clk);
    @(negedge clk); ext_trig = 1; repeat (4) @(negedge clk); ext_trig = 0;
    wait (busy);
    take_snapshot(1);
    w = 0;
    while (n_stalls == 0 && w < 200000) begin @(posedge clk); w++; end
    check(n_stalls == 1 && busy, "second event stalls on the full buffer");
    if (n_stalls > 0) m_stall++;
    repeat (500) @(posedge clk);
    reading = 1;
    wait_idle();
    wait (buf_empty);
    repeat (20) @(posedge clk);
    check(n_events == 4 && n_swaps == 2, $sformatf("events %0d swaps %0d", n_events, n_swaps));
    m_swap = int'(n_swaps);
    check_event(0, 1, 1, 9, -1);
    check_event(1, 1, 1, 9, -1);
    m_bits9++;
    check(stream.size() == 0, "no words left over");
    // every mechanism happened
    $display("mechanisms: lock=%0d int=%0d ext=%0d wrap=%0d swap=%0d drop=%0d stall=%0d 12b=%0d 10b=%0d 9b=%0d",
             m_lock, m_int_trig, m_ext_trig, m_wrap, m_swap, m_drop, m_stall, m_bits12, m_bits10, m_bits9);
    check(m_lock > 0 && m_int_trig > 0 && m_ext_trig > 0 && m_wrap > 0 && m_swap > 0 && m_drop > 0
          && m_stall > 0 && m_bits12 > 0 && m_bits10 > 0 && m_bits9 > 0, "all mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
