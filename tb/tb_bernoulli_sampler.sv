// tb_bernoulli_sampler: checks the mask stream against a reference made of two
// bit-level LFSR models (taps R127, R126, R125, R120), an AND and PF-bit
// grouping.  Masks are popped at random times, so the FIFO runs full.  Also
// checks that the first mask is ready PF cycles after reset, the FIFO level
// never exceeds its depth, and the drop rate is close to p = 0.25.
module tb_bernoulli_sampler;
  localparam int PF = 64, D = 16, NM = 300;
  logic clk = 0, rst_n = 1, mask_pop = 0, mask_valid;
  logic [PF-1:0] mask;
  logic [255:0] seed;
  logic [$clog2(D):0] level;
  logic [127:0] r0, r1;
  int checks = 0, failures = 0, ones = 0, first_ready = -1;

  bernoulli_sampler #(.PF(PF), .N_LFSR(2), .FIFO_DEPTH(D)) dut (.clk, .rst_n, .seed, .mask_pop, .mask_valid, .mask, .level);

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic bit step(ref logic [127:0] r);
    bit o = r[127];
    r = {r[126:0], r[127] ^ r[126] ^ r[125] ^ r[120]};
    return o;
  endfunction

  function automatic logic [PF-1:0] ref_mask();
    logic [PF-1:0] m;
    for (int i = 0; i < PF; i++) m[i] = step(r0) & step(r1);
    return m;
  endfunction

  initial begin
    seed = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    r0 = seed[127:0]; r1 = seed[255:128];
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int c = 1; c < 200 && first_ready < 0; c++) begin
      @(negedge clk);
      if (mask_valid) first_ready = c;
    end
    checks++;
    if (first_ready != PF) begin failures++; $display("FAIL first mask after %0d cycles", first_ready); end
    for (int n = 0; n < NM; n++) begin
      logic [PF-1:0] e;
      repeat ($urandom % (n < 100 ? 300 : 20)) @(negedge clk);
      while (!mask_valid) @(negedge clk);
      e = ref_mask();
      checks++;
      if (mask !== e) begin failures++; if (failures < 5) $display("FAIL mask %0d %h exp %h", n, mask, e); end
      ones += $countones(mask);
      mask_pop = 1; @(negedge clk); mask_pop = 0;
    end
    checks++;
    if (ones < NM*PF*22/100 || ones > NM*PF*28/100) begin failures++; $display("FAIL drop rate %0d/%0d", ones, NM*PF); end
    $display("drop rate %0d/%0d", ones, NM*PF);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && level > D) begin failures++; $display("FAIL level"); end
endmodule
