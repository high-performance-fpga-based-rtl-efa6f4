// processing_unit: computes the outputs of one filter.
//
// A PU holds PV multiplication-addition modules (mac_tree), one per output
// pixel processed in parallel (vector parallelism); all of them use the same
// PC weights of this filter and each gets its own PC input activations.  Each
// module feeds an accumulator that sums the partial dot products of one output
// pixel over kernel positions and channel tiles.  The paper gives the PV x PC
// organisation; the accumulator and its first/last framing are this design's.
//
// Timing: a beat with in_valid, first and last flags enters at cycle t; the
// beat marked last completes a pixel and the PV sums appear with out_valid at
// cycle t+3.  A beat marked first restarts the accumulation.  One beat per
// cycle, no stalls.
module processing_unit
  import bnn_pkg::*;
#(
  parameter int unsigned PC = 64,
  parameter int unsigned PV = 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic signed [DW-1:0]     act [PV][PC],
  input  logic signed [DW-1:0]     wgt [PC],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  acc_o [PV]
);
  localparam int unsigned SW = 2*DW + $clog2(PC);

  logic                     mv [PV];
  logic signed [SW-1:0]     ms [PV];
  logic [1:0]               first_d, last_d;
  logic signed [ACC_W-1:0]  acc [PV];
  logic signed [ACC_W-1:0]  nxt [PV];

  for (genvar v = 0; v < PV; v++) begin : g_mac
    mac_tree #(.PC(PC)) u_mac (
      .clk, .rst_n, .in_valid,
      .act(act[v]), .wgt(wgt),
      .out_valid(mv[v]), .sum(ms[v])
    );
  end

  // first/last travel alongside the two mac_tree pipeline stages
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first_d <= '0;
      last_d  <= '0;
    end else begin
      first_d <= {first_d[0], first && in_valid};
      last_d  <= {last_d[0],  last  && in_valid};
    end
  end

  always_comb begin
    for (int v = 0; v < PV; v++)
      nxt[v] = first_d[1] ? ACC_W'(ms[v]) : acc[v] + ACC_W'(ms[v]);
  end

  always_ff @(posedge clk) begin
    for (int v = 0; v < PV; v++) begin
      if (mv[0]) acc[v] <= nxt[v];
      if (mv[0] && last_d[1]) acc_o[v] <= nxt[v];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= mv[0] && last_d[1];
  end
endmodule
