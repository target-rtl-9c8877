`timescale 1ns/1ps
// wilkinson_counter: the counting half of the 32 Wilkinson ADCs of one
// TARGET 1 chip, which the paper places in the companion FPGA.
//
// A Wilkinson conversion starts a linear voltage ramp and a counter at the
// same time; when the ramp passes the stored cell voltage the comparator
// output rises and stops that channel's counter, whose value is the ADC code.
// Following the paper, the counter is 12 bits, its result is gray coded, and
// it counts on both edges of the clock (222.5 MHz clock -> 445 MHz count
// rate). Each channel holds two binary half counters, one advanced on the
// rising and one on the falling clock edge while its comparator is low; the
// code is their sum. A shared pair of half counters without a stop input
// measures the ramp time: the conversion ends when it reaches max_count
// (2^bits - 1, so 9 to 12 bits set the digitization time), and channels whose
// comparator never rose read max_count. The split into half counters and the
// gray coding of the sum are this design's choices.
//
// Interface: start (one clock) clears all counts and starts counting on the
// next edge; done rises when the conversion has ended and stays high until
// the next start. code[i] is valid while done is high.
// Timing: a full 12-bit conversion takes 2048 clock cycles (9.2 us at
// 222.5 MHz), as in the paper.
module wilkinson_counter
  import target_pkg::*;
#(
  parameter int unsigned N = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  adc_t         max_count,
  input  logic [N-1:0] stop,        // comparator outputs
  output logic         running,
  output logic         done,
  output adc_t         code [N]     // gray-coded results
);

  logic [ADC_BITS-1:0] cp [N];
  logic [ADC_BITS-1:0] cn [N];
  logic [ADC_BITS-1:0] gp, gn;
  logic                clr_req;
  logic [ADC_BITS:0]   gsum;

  assign gsum = {1'b0, gp} + {1'b0, gn};

  // rising-edge half: control and the rising-edge counts
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      done    <= 1'b0;
      clr_req <= 1'b0;
      gp      <= '0;
      for (int i = 0; i < N; i++) cp[i] <= '0;
    end else if (start) begin
      running <= 1'b1;
      done    <= 1'b0;
      clr_req <= 1'b1;
      gp      <= '0;
      for (int i = 0; i < N; i++) cp[i] <= '0;
    end else begin
      clr_req <= 1'b0;
      if (running) begin
        if (gsum >= {1'b0, max_count}) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          gp <= gp + 1'b1;
          for (int i = 0; i < N; i++)
            if (!stop[i]) cp[i] <= cp[i] + 1'b1;
        end
      end
    end
  end

  // falling-edge half
  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gn <= '0;
      for (int i = 0; i < N; i++) cn[i] <= '0;
    end else if (clr_req) begin
      gn <= '0;
      for (int i = 0; i < N; i++) cn[i] <= '0;
    end else if (running && gsum < {1'b0, max_count}) begin
      gn <= gn + 1'b1;
      for (int i = 0; i < N; i++)
        if (!stop[i]) cn[i] <= cn[i] + 1'b1;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic [ADC_BITS:0] s;
      s = {1'b0, cp[i]} + {1'b0, cn[i]};
      code[i] = bin2gray((s > {1'b0, max_count}) ? max_count : s[ADC_BITS-1:0]);
    end
  end

endmodule
