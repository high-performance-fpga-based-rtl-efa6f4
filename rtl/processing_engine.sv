// processing_engine: the matrix-multiplication engine of the NNE.
//
// PF processing units work on PF filters at once (filter parallelism); each PU
// has PV mac_trees (vector parallelism) of PC multipliers (channel
// parallelism), so the engine performs PF*PV*PC 8-bit multiplications per
// cycle.  All PUs receive the same PV activation vectors; PU f receives the PC
// weights of filter f.  This organisation is the paper's (PF = PC = 64,
// PV = 1 in its implementation).
//
// Timing: as processing_unit; the sums of a pixel appear three cycles after
// its last beat, for all PF filters and PV pixels at once.
module processing_engine
  import bnn_pkg::*;
#(
  parameter int unsigned PF = 64,
  parameter int unsigned PC = 64,
  parameter int unsigned PV = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic signed [DW-1:0]     act [PV][PC],
  input  logic signed [DW-1:0]     wgt [PF][PC],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  acc_o [PF][PV]
);
  logic pv_valid [PF];

  for (genvar f = 0; f < PF; f++) begin : g_pu
    processing_unit #(.PC(PC), .PV(PV)) u_pu (
      .clk, .rst_n, .in_valid, .first, .last,
      .act(act), .wgt(wgt[f]),
      .out_valid(pv_valid[f]), .acc_o(acc_o[f])
    );
  end

  assign out_valid = pv_valid[0];
endmodule
