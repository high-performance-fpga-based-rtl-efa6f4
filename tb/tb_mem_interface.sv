// tb_mem_interface: PF = 4, 64-bit bus, against the memory model with random
// grants.  Issues bursts to each destination and checks that every returned
// word is routed to the right place with the right local index, that the
// burst length is respected, and that cmd_ready returns only when the burst is
// complete; then drains a queue of writes and checks memory.
module tb_mem_interface;
  import bnn_pkg::*;
  localparam int BW = 64, PF = 4;
  logic clk = 0, rst_n = 1;
  logic cmd_valid = 0, cmd_ready;
  logic [31:0] cmd_addr = 0, cmd_len = 0;
  dst_e cmd_dst = DST_IBUF;
  logic [BW-1:0] d_data;
  logic ib_we, wb_we, bn_we, res_push, wq_pop;
  logic [31:0] ib_waddr, wb_waddr, bn_beat;
  logic [$clog2(PF)-1:0] wb_wfilt;
  logic wq_empty;
  logic [31:0] wq_addr;
  logic [BW-1:0] wq_data;
  logic m_rd_req, m_rd_gnt, m_rd_valid, m_wr_req, m_wr_gnt;
  logic [31:0] m_rd_addr, m_wr_addr;
  logic [BW-1:0] m_rd_data, m_wr_data;
  int checks = 0, failures = 0, got = 0;
  logic [31:0] cur_base;
  dst_e cur_dst;
  logic [31:0] wqa [64];
  logic [BW-1:0] wqd [64];
  int wq_head = 0, wq_n = 0;

  mem_interface #(.BUS_W(BW), .PF(PF)) dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .cmd_dst,
    .d_data, .ib_we, .ib_waddr, .wb_we, .wb_waddr, .wb_wfilt, .bn_we, .bn_beat, .res_push,
    .wq_empty, .wq_addr, .wq_data, .wq_pop,
    .m_rd_req, .m_rd_addr, .m_rd_gnt, .m_rd_valid, .m_rd_data,
    .m_wr_req, .m_wr_addr, .m_wr_data, .m_wr_gnt
  );
  ddr_model #(.BUS_W(BW), .DEPTH(4096), .LAT(5), .GNT_PCT(60)) mem (
    .clk, .rd_req(m_rd_req), .rd_addr(m_rd_addr), .rd_gnt(m_rd_gnt), .rd_valid(m_rd_valid),
    .rd_data(m_rd_data), .wr_req(m_wr_req), .wr_addr(m_wr_addr), .wr_data(m_wr_data), .wr_gnt(m_wr_gnt)
  );

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

  // routing monitor
  always @(negedge clk) if (rst_n) begin
    automatic int n = int'(ib_we) + int'(wb_we) + int'(bn_we) + int'(res_push);
    if (n != 0) begin
      check(n == 1, "one destination per word");
      check(d_data == mem.mem[cur_base + got], $sformatf("data of word %0d", got));
      case (cur_dst)
        DST_IBUF: check(ib_we && ib_waddr == got, "input buffer index");
        DST_WBUF: check(wb_we && wb_waddr == got / PF && wb_wfilt == got % PF, "weight buffer index");
        DST_BN:   check(bn_we && bn_beat == got, "bn index");
        default:  check(res_push, "residual push");
      endcase
      got++;
    end
  end

  assign wq_empty = (wq_head >= wq_n);
  assign wq_addr  = wqa[wq_head % 64];
  assign wq_data  = wqd[wq_head % 64];
  always @(posedge clk) if (wq_pop) wq_head <= wq_head + 1;

  initial begin
    for (int a = 0; a < 4096; a++) mem.mem[a] = {$urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      automatic int len = 1 + $urandom % 30;
      @(negedge clk);
      check(cmd_ready, "ready when idle");
      cur_base = $urandom % 3000; cur_dst = dst_e'(b % 4); got = 0;
      cmd_valid = 1; cmd_addr = cur_base; cmd_len = len; cmd_dst = cur_dst;
      @(negedge clk) cmd_valid = 0;
      while (!cmd_ready) begin
        @(negedge clk);
        if (got > len) break;
      end
      check(got == len, $sformatf("burst of %0d returned %0d words", len, got));
    end
    // writes
    for (int i = 0; i < 50; i++) begin wqa[i] = 3000 + i; wqd[i] = {$urandom, $urandom}; end
    @(negedge clk) wq_n = 50;
    #1;
    begin
      logic [BW-1:0] exp [50];
      for (int i = 0; i < 50; i++) exp[i] = wqd[i];
      while (!wq_empty) @(negedge clk);
      repeat (2) @(negedge clk);
      $display("writes %0d head %0d", mem.n_writes, wq_head);
      for (int i = 0; i < 50; i++) check(mem.mem[3000 + i] == exp[i], $sformatf("written word %0d %h %h", i, mem.mem[3000+i], exp[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
