// tb_processing_unit: PV = 2 lanes, PC = 8.  Sends pixels of random beat counts
// (first/last framing) with random idle cycles and checks each lane's
// accumulated dot product and the three-cycle latency after the last beat.
module tb_processing_unit;
  import bnn_pkg::*;
  localparam int PC = 8, PV = 2;
  logic clk = 0, rst_n = 1, in_valid = 0, first = 0, last = 0, out_valid;
  logic signed [DW-1:0] act [PV][PC], wgt [PC];
  logic signed [ACC_W-1:0] acc_o [PV];
  longint expq [$];
  int vq [$];
  int checks = 0, failures = 0, cyc = 0;

  processing_unit #(.PC(PC), .PV(PV)) dut (.clk, .rst_n, .in_valid, .first, .last, .act, .wgt, .out_valid, .acc_o);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  always @(posedge clk) cyc++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    longint e [PV];
    int c;
    checks++;
    if (expq.size() < PV) begin failures++; end
    else begin
      foreach (e[i]) e[i] = expq.pop_front();
      c = vq.pop_front();
      for (int v = 0; v < PV; v++) begin
        checks++;
        if (acc_o[v] != e[v]) begin failures++; $display("FAIL lane %0d %0d exp %0d", v, acc_o[v], e[v]); end
      end
      if (cyc - c != 3) begin failures++; $display("FAIL latency %0d", cyc - c); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 200; p++) begin
      automatic int nb = 1 + $urandom % 9;
      longint e [PV];
      for (int v = 0; v < PV; v++) e[v] = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid = 0; first = 0; last = 0;
        if ($urandom % 4 == 0) begin @(negedge clk); end   // idle gap
        in_valid = 1; first = (b == 0); last = (b == nb - 1);
        for (int c = 0; c < PC; c++) begin
          wgt[c] = $urandom;
          for (int v = 0; v < PV; v++) act[v][c] = $urandom;
        end
        for (int c = 0; c < PC; c++)
          for (int v = 0; v < PV; v++) e[v] += longint'(act[v][c]) * longint'(wgt[c]);
        if (last) begin foreach (e[i]) expq.push_back(e[i]); vq.push_back(cyc); end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(negedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
