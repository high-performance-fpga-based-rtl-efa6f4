// dropout_unit: applies the Monte Carlo Dropout mask to the engine's outputs.
//
// A bank of PF x PV multiplexers: output (f, v) is forced to zero when the
// dropout unit is enabled and mask bit f is 1 (filter f dropped for this
// sample), otherwise it passes the functional unit's value.  The mask is
// filter-wise, so one PF-bit mask covers every pixel of a filter group.  The
// multiplexer bank is the paper's; mask polarity (1 = drop) and the output
// register are this design's choices.
//
// Timing: in_valid at cycle t gives out_valid at t+1.
module dropout_unit
  import bnn_pkg::*;
#(
  parameter int unsigned PF = 64,
  parameter int unsigned PV = 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 do_en,
  input  logic [PF-1:0]        mask,
  input  logic signed [DW-1:0] y_in  [PF][PV],
  output logic                 out_valid,
  output logic signed [DW-1:0] y_out [PF][PV]
);
  always_ff @(posedge clk) begin
    if (in_valid)
      for (int f = 0; f < PF; f++)
        for (int v = 0; v < PV; v++)
          y_out[f][v] <= (do_en && mask[f]) ? '0 : y_in[f][v];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
