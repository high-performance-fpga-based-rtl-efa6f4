// tb_input_buffer: fills every word with a value derived from its address, then
// reads random addresses on both read ports (PV = 2) and checks the data one
// cycle later; then overwrites some words and reads them back.
module tb_input_buffer;
  import bnn_pkg::*;
  localparam int PC = 64, PV = 2, D = 4096, AW = $clog2(D);
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = 0, raddr [PV];
  logic [PC*DW-1:0] wdata = 0, rdata [PV];
  logic [PC*DW-1:0] model [D];
  int checks = 0, failures = 0;

  input_buffer #(.PC(PC), .PV(PV), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [PC*DW-1:0] pat(int a, int salt);
    logic [PC*DW-1:0] r;
    for (int i = 0; i < PC*DW/32; i++) r[i*32 +: 32] = a * 32'h9e3779b1 + i * 7919 + salt;
    return r;
  endfunction

  task automatic read_check(int n);
    for (int i = 0; i < n; i++) begin
      int a [PV];
      @(negedge clk);
      for (int v = 0; v < PV; v++) begin a[v] = $urandom % D; raddr[v] = AW'(a[v]); end
      @(negedge clk);
      for (int v = 0; v < PV; v++) begin
        checks++;
        if (rdata[v] !== model[a[v]]) begin failures++; if (failures < 5) $display("FAIL addr %0d", a[v]); end
      end
    end
  endtask

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = pat(a, 0); model[a] = wdata;
    end
    @(negedge clk) we = 0;
    read_check(1000);
    for (int i = 0; i < 300; i++) begin
      automatic int a = $urandom % D;
      @(negedge clk);
      we = 1; waddr = AW'(a); wdata = pat(a, i + 1); model[a] = wdata;
    end
    @(negedge clk) we = 0;
    read_check(1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
