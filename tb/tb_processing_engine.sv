// tb_processing_engine: PF = 4 filters, PC = 8 channels, PV = 2 pixels.  Each
// filter gets its own weights; checks all PF x PV accumulated results and the
// three-cycle latency.
module tb_processing_engine;
  import bnn_pkg::*;
  localparam int PF = 4, PC = 8, PV = 2;
  logic clk = 0, rst_n = 1, in_valid = 0, first = 0, last = 0, out_valid;
  logic signed [DW-1:0] act [PV][PC], wgt [PF][PC];
  logic signed [ACC_W-1:0] acc_o [PF][PV];
  longint expq [$];
  int vq [$];
  int checks = 0, failures = 0, cyc = 0;

  processing_engine #(.PF(PF), .PC(PC), .PV(PV)) dut (.clk, .rst_n, .in_valid, .first, .last, .act, .wgt, .out_valid, .acc_o);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  always @(posedge clk) cyc++;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    longint e [PF][PV];
    int c;
    checks++;
    if (expq.size() < PF*PV) failures++;
    else begin
      foreach (e[i, j]) e[i][j] = expq.pop_front();
      c = vq.pop_front();
      for (int f = 0; f < PF; f++)
        for (int v = 0; v < PV; v++) begin
          checks++;
          if (acc_o[f][v] != e[f][v]) begin failures++; $display("FAIL f%0d v%0d %0d exp %0d", f, v, acc_o[f][v], e[f][v]); end
        end
      if (cyc - c != 3) begin failures++; $display("FAIL latency"); end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 100; p++) begin
      automatic int nb = 1 + $urandom % 6;
      longint e [PF][PV];
      foreach (e[f, v]) e[f][v] = 0;
      for (int b = 0; b < nb; b++) begin
        @(negedge clk);
        in_valid = 1; first = (b == 0); last = (b == nb - 1);
        foreach (wgt[f, c]) wgt[f][c] = $urandom;
        foreach (act[v, c]) act[v][c] = $urandom;
        for (int f = 0; f < PF; f++)
          for (int v = 0; v < PV; v++)
            for (int c = 0; c < PC; c++) e[f][v] += longint'(act[v][c]) * longint'(wgt[f][c]);
        if (last) begin foreach (e[i,j]) expq.push_back(e[i][j]); vq.push_back(cyc); end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(negedge clk);
    checks++; if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
