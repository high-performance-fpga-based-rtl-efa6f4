// tb_weight_buffer: writes every (word, filter) slice one at a time, as the
// memory interface does, then reads random words and checks all PF slices.
module tb_weight_buffer;
  import bnn_pkg::*;
  localparam int PF = 64, PC = 64, D = 128, AW = $clog2(D);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr = 0;
  logic [$clog2(PF)-1:0] wfilt = 0;
  logic [PC*DW-1:0] wdata = 0, rdata [PF];
  int checks = 0, failures = 0;

  weight_buffer #(.PF(PF), .PC(PC), .DEPTH(D)) dut (.clk, .we, .waddr, .wfilt, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [PC*DW-1:0] pat(int a, int f);
    logic [PC*DW-1:0] r;
    for (int i = 0; i < PC*DW/32; i++) r[i*32 +: 32] = (a * PF + f) * 32'h9e3779b1 + i;
    return r;
  endfunction

  initial begin
    for (int a = 0; a < D; a++)
      for (int f = 0; f < PF; f++) begin
        @(negedge clk);
        we = 1; waddr = AW'(a); wfilt = $clog2(PF)'(f); wdata = pat(a, f);
      end
    @(negedge clk) we = 0;
    for (int i = 0; i < 400; i++) begin
      automatic int a = $urandom % D;
      @(negedge clk) raddr = AW'(a);
      @(negedge clk);
      for (int f = 0; f < PF; f++) begin
        checks++;
        if (rdata[f] !== pat(a, f)) begin failures++; if (failures < 5) $display("FAIL a%0d f%0d", a, f); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
