// tb_lfsr: checks the 128-bit LFSR against properties derived independently of
// its implementation: the first 128 output bits are the seed read from R127
// down to R0; afterwards every output bit obeys the recurrence
// b(t+128) = b(t) ^ b(t+1) ^ b(t+2) ^ b(t+7) of taps R127, R126, R125, R120;
// the output holds while en is low; about half the bits are ones.
module tb_lfsr;
  localparam int N = 128;
  localparam int T = 2000;
  logic clk = 0, rst_n = 1, en = 0, bit_o;
  logic [N-1:0] seed;
  bit b [T];
  int checks = 0, failures = 0, ones = 0;

  lfsr #(.N_REG(N)) dut (.clk, .rst_n, .en, .seed, .bit_o);

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
    seed = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < T; t++) begin
      b[t] = bit_o;
      if (t % 7 == 3) begin           // hold for one cycle with en low
        en = 0; @(negedge clk);
        check(bit_o == b[t], "output changed while en low");
      end
      en = 1; @(negedge clk); en = 0;
    end
    for (int t = 0; t < N; t++) check(b[t] == seed[N-1-t], $sformatf("seed bit %0d", t));
    for (int t = 0; t + N < T; t++)
      check(b[t+N] == (b[t] ^ b[t+1] ^ b[t+2] ^ b[t+7]), $sformatf("recurrence at %0d", t));
    foreach (b[t]) ones += b[t];
    check(ones > T*45/100 && ones < T*55/100, $sformatf("ones fraction %0d/%0d", ones, T));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
