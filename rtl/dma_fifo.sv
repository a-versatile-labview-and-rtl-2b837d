// dma_fifo: synchronous FIFO standing for one DMA channel between FPGA and host.
//
// The host exchanges data with the FPGA program through DMA FIFOs: digitised and
// filtered samples flow up to the host, command words flow down. This module is the
// FPGA-side buffer of one such channel, with valid/ready handshakes on both sides
// (a word moves when valid and ready are both high in a cycle). It holds DEPTH words
// in a memory array; out_data is valid in the same cycle as out_valid (first-word
// fall-through from a registered read pointer). count is the fill level.
// Depth and width are this design's choices; the paper does not give them.
//
// Timing: a word written in cycle t can be read from cycle t+1. Full throughput of one
// word per cycle on each side, simultaneously.
module dma_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic push, pop;

  assign in_ready  = (count != CW'(DEPTH));
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + AW'(1);
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + AW'(1);
      count <= count + CW'(push) - CW'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));
  a_data_stable:  assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
