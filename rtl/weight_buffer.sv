// weight_buffer: caches the weights of the PF filters being processed.
//
// Word a of the buffer holds, for each of the PF filters, the PC weights that
// multiply input word (kernel position, channel tile) a, with
// a = (ky*K + kx)*CT + ct.  It is filled one filter slice (PC bytes, one memory
// beat) at a time and read PF slices at a time, so the engine gets all its
// weights for a cycle in one read.  Caching only PF filters is the paper's;
// DEPTH = 128 (K*K*C/PC up to 128, e.g. 3x3 kernels over 1024 channels) is
// this design's choice.
//
// Interface: write (we, waddr, wfilt, wdata); read raddr at cycle t gives
// rdata at t+1.
module weight_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned PF    = 64,
  parameter int unsigned PC    = 64,
  parameter int unsigned DEPTH = 128
) (
  input  logic                      clk,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [$clog2(PF)-1:0]     wfilt,
  input  logic [PC*DW-1:0]          wdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output logic [PC*DW-1:0]          rdata [PF]
);
  // one memory per filter so that all PF slices are read in the same cycle
  for (genvar f = 0; f < PF; f++) begin : g_bank
    logic [PC*DW-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wfilt == f) mem[waddr] <= wdata;
      rdata[f] <= mem[raddr];
    end
  end
endmodule
