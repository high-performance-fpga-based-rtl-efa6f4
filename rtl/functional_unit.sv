// functional_unit: the post-processing chain that follows each processing unit.
//
// Four registered stages in the order BN -> ReLU -> Pool -> SC, as in the paper:
//   BN   y = sat8((acc * scale + bias + 2^(shift-1)) >>> shift): batch
//        normalisation folded into an integer scale and bias, which also
//        requantises the 32-bit sum to 8 bits (the dropout factor 1/(1-p) is
//        folded into the scale by the software that prepares the weights);
//   ReLU y = max(y, 0) when relu_en;
//   Pool maximum over pool_n consecutive inputs (the controller delivers the
//        pixels of one pooling window back to back); pool_n = 1 passes through;
//   SC   y = sat8(y + res) when sc_en: residual (shortcut) addition.
// The stage order is the paper's; the integer formats, the choice of max
// pooling and the window ordering are this design's.
//
// Timing: an input at cycle t reaches the pool stage at t+2; the pool stage
// emits with pool_valid at t+3 when it holds the last value of a window; the
// residual `res` must be presented in that cycle (the top pops it from a FIFO
// on pool_valid).  out_valid follows at t+4.  The lane accepts one value per
// cycle; configuration inputs must be stable while data are in flight.
module functional_unit
  import bnn_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ACC_W-1:0]  acc,
  input  logic signed [15:0]       bn_scale,
  input  logic signed [31:0]       bn_bias,
  input  logic [4:0]               bn_shift,
  input  logic                     relu_en,
  input  logic [7:0]               pool_n,
  input  logic                     sc_en,
  input  logic signed [DW-1:0]     res,
  output logic                     pool_valid,
  output logic                     out_valid,
  output logic signed [DW-1:0]     y
);
  logic                    v1, v2;
  logic signed [DW-1:0]    y1, y2, y3, pmax, pcur;
  logic [7:0]              pcnt;
  logic signed [ACC_W+16:0] bn_full;

  // ---- BN ----
  always_comb begin
    bn_full = (ACC_W+17)'(acc) * (ACC_W+17)'(bn_scale) + (ACC_W+17)'(bn_bias);
    if (bn_shift != 0) bn_full = (bn_full + ((ACC_W+17)'(1) <<< (bn_shift - 1))) >>> bn_shift;
  end

  always_ff @(posedge clk) begin
    y1 <= sat8(bn_full);
    y2 <= (relu_en && y1 < 0) ? '0 : y1;          // ReLU
  end

  // ---- Pool ----
  assign pcur = (pcnt == 0 || y2 > pmax) ? y2 : pmax;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; pool_valid <= 1'b0; out_valid <= 1'b0;
      pcnt <= '0; pmax <= '0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      pool_valid <= 1'b0;
      if (v2) begin
        if (pcnt + 8'd1 >= pool_n) begin
          pcnt       <= '0;
          pool_valid <= 1'b1;
        end else begin
          pcnt <= pcnt + 8'd1;
        end
        pmax <= pcur;
      end
      out_valid <= pool_valid;
    end
  end

  always_ff @(posedge clk) if (v2) y3 <= pcur;

  // ---- SC ----
  always_ff @(posedge clk) begin
    if (pool_valid) y <= sc_en ? sat8((ACC_W+17)'(y3) + (ACC_W+17)'(res)) : y3;
  end
endmodule
