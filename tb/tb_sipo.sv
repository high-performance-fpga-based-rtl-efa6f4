// tb_sipo: feeds random bits with random gaps and checks that every WIDTH-th
// accepted bit produces one word holding the last WIDTH bits, first bit in bit 0.
module tb_sipo;
  localparam int W = 16;
  logic clk = 0, rst_n = 1, in_valid = 0, in_bit = 0, word_valid;
  logic [W-1:0] word;
  bit q [$];
  int checks = 0, failures = 0, words = 0;

  sipo #(.WIDTH(W)) dut (.clk, .rst_n, .in_valid, .in_bit, .word_valid, .word);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_bit   = $urandom;
      #1;
      if (in_valid) q.push_back(in_bit);
      checks++;
      if (word_valid != (in_valid && q.size() == W)) begin
        failures++; $display("FAIL word_valid at %0d", i);
      end
      if (word_valid) begin
        logic [W-1:0] exp;
        for (int k = 0; k < W; k++) exp[k] = q[k];
        checks++; words++;
        if (word !== exp) begin failures++; $display("FAIL word %h exp %h", word, exp); end
        q.delete();
      end
    end
    checks++; if (words < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
