// tb_mac_tree: streams random signed 8-bit vectors (including the extreme
// values) and checks each dot product and its two-cycle latency.
module tb_mac_tree;
  import bnn_pkg::*;
  localparam int PC = 64;
  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  logic signed [DW-1:0] act [PC], wgt [PC];
  logic signed [2*DW+$clog2(PC)-1:0] sum;
  longint expq [$];
  int vq [$];
  int checks = 0, failures = 0, cyc = 0;

  mac_tree #(.PC(PC)) dut (.clk, .rst_n, .in_valid, .act, .wgt, .out_valid, .sum);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  always @(posedge clk) cyc++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (expq.size() == 0) failures++;
    else begin
      automatic longint e = expq.pop_front();
      automatic int c = vq.pop_front();
      if (sum != e) begin failures++; $display("FAIL sum %0d exp %0d", sum, e); end
      if (cyc - c != 2) begin failures++; $display("FAIL latency %0d", cyc - c); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      automatic longint e = 0;
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      for (int c = 0; c < PC; c++) begin
        act[c] = (i < 3) ? (i == 0 ? -128 : (i == 1 ? 127 : -128)) : $urandom;
        wgt[c] = (i < 3) ? (i == 0 ? -128 : (i == 1 ? 127 : 127)) : $urandom;
        e += longint'(act[c]) * longint'(wgt[c]);
      end
      if (in_valid) begin expq.push_back(e); vq.push_back(cyc); end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(negedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
