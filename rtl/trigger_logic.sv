`timescale 1ns/1ps
// trigger_logic: the digital part of the TARGET 1 self-trigger.
//
// Each of the 16 channels has an analog comparator against a common
// threshold (modelled in trigger_comparator_model). This block forms the
// single chip trigger from them, as the paper describes: the OR of the 16
// comparator outputs, with a configurable output polarity and a tunable
// output width. On the chip the width is set by an analog bias (WBIAS);
// here it is a counter of trig_width clock cycles, which is this design's
// stand-in for that one-shot.
//
// Behaviour: the OR is brought into the clock domain with two flip-flops;
// its rising edge starts a pulse of max(trig_width,1) cycles. The pulse is
// not retriggerable: edges during a pulse are ignored (design choice).
// dhit = pulse XOR out_inv. There is no channel mask, as on the chip.
//
// Timing: dhit rises 3 clock edges after the first comparator rises.
module trigger_logic
  import target_pkg::*;
#(
  parameter int unsigned WIDTH_BITS = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NUM_CH-1:0]     hit,        // comparator outputs (asynchronous)
  input  logic                  out_inv,    // output polarity
  input  logic [WIDTH_BITS-1:0] width,      // pulse width, clock cycles
  output logic                  dhit,       // chip trigger output
  output logic                  any_hit     // synchronised OR, for monitoring
);

  logic or_s1, or_s2, or_s3;
  logic [WIDTH_BITS-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      or_s1 <= 1'b0;
      or_s2 <= 1'b0;
      or_s3 <= 1'b0;
      cnt   <= '0;
    end else begin
      or_s1 <= |hit;
      or_s2 <= or_s1;
      or_s3 <= or_s2;
      if (cnt != '0)
        cnt <= cnt - 1'b1;
      else if (or_s2 && !or_s3)
        cnt <= (width == '0) ? WIDTH_BITS'(1) : width;
    end
  end

  assign any_hit = or_s2;
  assign dhit    = (cnt != '0) ^ out_inv;

endmodule
