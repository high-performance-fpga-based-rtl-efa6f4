// tb_functional_unit: random accumulator values through BN (scale, bias,
// rounding shift, saturation), ReLU, max pooling over 1 or 4 values and the
// saturating shortcut addition, in the several on/off combinations.  The
// expected value is computed here from the formulas; the residual is offered
// in the pool_valid cycle as the accelerator does.  Also checks latency 4.
module tb_functional_unit;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 1, in_valid = 0, relu_en = 0, sc_en = 0, pool_valid, out_valid;
  logic signed [ACC_W-1:0] acc = 0;
  logic signed [15:0] bn_scale = 0;
  logic signed [31:0] bn_bias = 0;
  logic [4:0] bn_shift = 0;
  logic [7:0] pool_n = 1;
  logic signed [DW-1:0] res = 0, y;
  int expq [$], resq [$], vq [$];
  int checks = 0, failures = 0, cyc = 0, n_sat = 0;

  functional_unit dut (.clk, .rst_n, .in_valid, .acc, .bn_scale, .bn_bias, .bn_shift, .relu_en,
                       .pool_n, .sc_en, .res, .pool_valid, .out_valid, .y);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  always @(posedge clk) cyc++;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int clip(longint v);
    return v > 127 ? 127 : (v < -128 ? -128 : int'(v));
  endfunction

  // residual for the next pooled output, offered in its pool_valid cycle
  logic pv_d = 0;
  always @(posedge clk) pv_d <= pool_valid;
  always @(negedge clk) begin
    if (rst_n && pv_d) void'(resq.pop_front());
    #1 res = (resq.size() > 0) ? DW'(resq[0]) : '0;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (expq.size() == 0) failures++;
    else begin
      automatic int e = expq.pop_front();
      automatic int c = vq.pop_front();
      if (y != e) begin failures++; if (failures < 10) $display("FAIL y %0d exp %0d", y, e); end
      if (cyc - c != 4) begin failures++; $display("FAIL latency %0d", cyc - c); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cfg = 0; cfg < 16; cfg++) begin
      @(negedge clk);
      in_valid = 0;
      repeat (8) @(negedge clk);               // drain before changing settings
      relu_en  = cfg[0];
      sc_en    = cfg[1];
      pool_n   = cfg[2] ? 4 : 1;
      bn_shift = cfg[3] ? 5'(4 + $urandom % 12) : 5'd0;
      for (int p = 0; p < 60; p++) begin
        automatic int m = -1000;
        automatic int r = $signed(8'($urandom));
        for (int i = 0; i < pool_n; i++) begin
          longint v;
          int q;
          @(negedge clk);
          acc      = $urandom % 200001 - 100000;
          bn_scale = $urandom % 4001 - 2000;
          bn_bias  = $urandom % 200001 - 100000;
          v = longint'(acc) * bn_scale + bn_bias;
          if (bn_shift != 0) v = (v + (longint'(1) << (bn_shift - 1))) >>> bn_shift;
          q = clip(v);
          if (q == 127 || q == -128) n_sat++;
          if (relu_en && q < 0) q = 0;
          if (q > m) m = q;
          in_valid = 1;
          if (i == pool_n - 1) begin
            expq.push_back(sc_en ? clip(m + r) : m);
            resq.push_back(r);
            vq.push_back(cyc);
          end
          // BN is held for one cycle with invalid data in between sometimes
          if ($urandom % 5 == 0) begin @(negedge clk); in_valid = 0; end
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (8) @(negedge clk);
    checks++; if (expq.size() != 0 || n_sat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
