// input_buffer: on-chip store for the whole input feature map of one layer.
//
// Each word holds PC channels (PC bytes) of one pixel; the controller places
// channel tile ct of pixel (y, x) at word (y*W + x)*CT + ct.  Because the whole
// map stays on chip, the buffer also serves as the intermediate-layer cache:
// with last-layer Bayesian inference the last layer's input is loaded once and
// reread for every Monte Carlo sample.  Sizing by the largest layer input is
// the paper's; DEPTH (1 MiB at the defaults) is this design's choice.
//
// Interface: one write port (we, waddr, wdata) and PV read ports; a read
// address at cycle t gives rdata at t+1.
module input_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned PC    = 64,
  parameter int unsigned PV    = 1,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [PC*DW-1:0]          wdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr [PV],
  output logic [PC*DW-1:0]          rdata [PV]
);
  logic [PC*DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    for (int v = 0; v < PV; v++) rdata[v] <= mem[raddr[v]];
  end
endmodule
