`timescale 1ns/1ps
// sampling_freq_loop: FPGA feedback loop that holds the TARGET 1 sampling
// frequency steady.
//
// The chip's sampling rate is set by the control voltage ROVDD on a
// voltage-controlled delay line and drifts with temperature. The chip
// outputs a ripple oscillator signal whose frequency is proportional to the
// sampling rate; the FPGA compares it with its own clock and moves ROVDD
// through an external DAC until the desired rate is reached (paper). How the
// comparison and the correction are made is not given. This design counts
// rising edges of the ripple oscillator over a window of WINDOW_CLKS clock
// cycles and adds (target - measured) << GAIN_SHIFT to the DAC code, clamped
// to its range: a higher ROVDD gives faster sampling. The defaults assume a
// ripple oscillator at 1/64 of the sampling rate, so 1 GSa/s gives 288 edges
// in 4096 cycles of 222.5 MHz.
//
// Interface: rco is asynchronous and is synchronised with two flip-flops.
// dac_code changes once per window; locked is high after a window whose
// error was within +-1 edge. measured holds the last window's count.
module sampling_freq_loop #(
  parameter int unsigned WINDOW_CLKS  = 4096,
  parameter int unsigned TARGET_COUNT = 288,
  parameter int unsigned DAC_BITS     = 12,
  parameter int unsigned INIT_DAC     = 3203,   // ROVDD ~1.955 V on a 2.5 V DAC
  parameter int unsigned GAIN_SHIFT   = 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic                rco,
  output logic [DAC_BITS-1:0] dac_code,
  output logic                locked,
  output logic [15:0]         measured
);

  logic        r1, r2, r3;
  logic [15:0] edges;
  logic [$clog2(WINDOW_CLKS)-1:0] tick;
  logic signed [31:0] err, next;

  assign err  = signed'(32'(TARGET_COUNT)) - signed'({16'd0, edges});
  assign next = signed'({{(32-DAC_BITS){1'b0}}, dac_code}) + (err <<< GAIN_SHIFT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1       <= 1'b0;
      r2       <= 1'b0;
      r3       <= 1'b0;
      edges    <= '0;
      tick     <= '0;
      dac_code <= DAC_BITS'(INIT_DAC);
      locked   <= 1'b0;
      measured <= '0;
    end else begin
      r1 <= rco;
      r2 <= r1;
      r3 <= r2;
      if (tick == ($clog2(WINDOW_CLKS))'(WINDOW_CLKS-1)) begin
        tick     <= '0;
        edges    <= '0;
        measured <= edges;
        locked   <= (err >= -1) && (err <= 1);
        if (enable) begin
          if (next < 0)                             dac_code <= '0;
          else if (next > (2**DAC_BITS)-1)          dac_code <= '1;
          else                                      dac_code <= next[DAC_BITS-1:0];
        end
      end else begin
        tick <= tick + 1'b1;
        if (r2 && !r3) edges <= edges + 1'b1;
      end
    end
  end

endmodule
