// mac_tree: one multiplication-addition module of a processing unit.
//
// PC signed 8-bit multipliers work on PC channels at once (channel
// parallelism) and a binary adder tree sums the PC products into one partial
// dot product.  Products are registered, then the tree result is registered:
// in_valid at cycle t gives out_valid and sum at cycle t+2, one result per
// cycle.  The multiplier-plus-adder-tree structure is the paper's; the two
// pipeline registers are this design's choice.  PC must be a power of two.
module mac_tree
  import bnn_pkg::*;
#(
  parameter int unsigned PC = 64
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic signed [DW-1:0]               act [PC],
  input  logic signed [DW-1:0]               wgt [PC],
  output logic                               out_valid,
  output logic signed [2*DW+$clog2(PC)-1:0]  sum
);
  localparam int unsigned LV = $clog2(PC);
  localparam int unsigned SW = 2*DW + LV;

  logic signed [2*DW-1:0] prod [PC];
  logic signed [SW-1:0]   tree [LV+1][PC];
  logic                   v1;

  always_ff @(posedge clk) begin
    for (int i = 0; i < PC; i++) prod[i] <= act[i] * wgt[i];
  end

  // Level 0 holds the products; level l+1 entry i adds entries 2i and 2i+1 of
  // level l.  Level LV entry 0 is the dot product.
  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int i = 0; i < PC; i++) tree[l][i] = '0;
    for (int i = 0; i < PC; i++) tree[0][i] = SW'(prod[i]);
    for (int l = 0; l < LV; l++)
      for (int i = 0; i < (PC >> (l+1)); i++)
        tree[l+1][i] = tree[l][2*i] + tree[l][2*i+1];
  end

  always_ff @(posedge clk) sum <= tree[LV][0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  initial assert ((PC & (PC-1)) == 0) else $error("mac_tree: PC must be a power of two");
endmodule
