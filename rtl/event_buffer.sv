`timescale 1ns/1ps
// event_buffer: FPGA RAM holding digitized events until data acquisition
// reads them over the 32-bit data bus.
//
// The paper only says that internal FPGA RAM buffers the data before it goes
// to the computer. This design uses the simplest structure that does that: a
// synchronous first-in first-out buffer of DEPTH 32-bit words in one memory
// array. The default of 1024 words holds one full event of 16 channels x 64
// samples (513 words); the depth is this design's choice.
//
// Interface: a write with wr_en stores wr_data (ignored when full). A read
// with rd_en while not empty presents the oldest word on rd_data one clock
// later with rd_valid high. wr_free is the number of free words.
module event_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           wr_data,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           rd_data,
  output logic                       rd_valid,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic [$clog2(DEPTH+1)-1:0] wr_free
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic             do_wr, do_rd;

  assign empty   = (count == '0);
  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign wr_free = ($clog2(DEPTH+1))'(DEPTH) - count;
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr] <= wr_data;
    if (do_rd) rd_data <= mem[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      rd_valid <= 1'b0;
    end else begin
      rd_valid <= do_rd;
      if (do_wr) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (do_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));

endmodule
