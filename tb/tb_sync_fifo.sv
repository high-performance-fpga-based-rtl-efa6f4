// tb_sync_fifo: random pushes and pops against a queue model; checks data
// order, count, full and empty, and that it fills to exactly DEPTH entries.
module tb_sync_fifo;
  localparam int W = 64, D = 16;
  logic clk = 0, rst_n = 1, push = 0, pop = 0, full, empty;
  logic [W-1:0] din = 0, dout;
  logic [$clog2(D):0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0, nfull = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty, .count);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      automatic int bias = (i / 500) % 2 ? 3 : 1;     // phases that fill and drain
      @(negedge clk);
      check(count == q.size(), $sformatf("count %0d exp %0d", count, q.size()));
      check(full == (q.size() == D) && empty == (q.size() == 0), "flags");
      if (q.size() > 0) check(dout == q[0], "head data");
      if (full) nfull++;
      push = !full && ($urandom % 4 < bias);
      pop  = !empty && ($urandom % 4 >= bias);
      din  = {$urandom, $urandom};
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(din);
      push = 0; pop = 0;
    end
    check(nfull > 0, "never full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
