// tb_dropout_unit: random masks and data; with do_en each filter whose mask bit
// is 1 must read zero and the others pass unchanged; without do_en all pass.
// Checks the one-cycle latency.
module tb_dropout_unit;
  import bnn_pkg::*;
  localparam int PF = 64, PV = 2;
  logic clk = 0, rst_n = 1, in_valid = 0, do_en = 0, out_valid;
  logic [PF-1:0] mask = 0;
  logic signed [DW-1:0] y_in [PF][PV], y_out [PF][PV];
  int checks = 0, failures = 0, dropped = 0;

  dropout_unit #(.PF(PF), .PV(PV)) dut (.clk, .rst_n, .in_valid, .do_en, .mask, .y_in, .out_valid, .y_out);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      logic signed [DW-1:0] e [PF][PV];
      @(negedge clk);
      in_valid = 1;
      do_en = (i % 3) != 0;
      mask = {$urandom, $urandom};
      foreach (y_in[f, v]) begin
        y_in[f][v] = $urandom;
        if (y_in[f][v] == 0) y_in[f][v] = 1;
        e[f][v] = (do_en && mask[f]) ? 0 : y_in[f][v];
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      foreach (e[f, v]) begin
        checks++;
        if (y_out[f][v] != e[f][v]) begin failures++; if (failures < 10) $display("FAIL f%0d v%0d", f, v); end
        if (y_out[f][v] == 0) dropped++;
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    checks++; if (dropped == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
