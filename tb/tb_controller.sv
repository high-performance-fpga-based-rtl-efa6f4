// tb_controller: PF = PC = 4.  The controller runs a two-layer schedule with
// caching on, L = 1, S = 3 against mock surroundings: a memory interface that
// is busy for a while after each burst and returns shortcut operands a few
// cycles later, a pipeline that retires output tags after a delay, and a mask
// FIFO that is ready at random.  Expected burst commands, engine beats
// (input address or zero padding, weight address, first/last) and output tag
// addresses are generated here from the loop definitions and compared in
// order.  Also checks the IC skip count, that stalls happened, and done.
module tb_controller;
  import bnn_pkg::*;
  localparam int PF = 4, PC = 4, BNB = (PF*64 + PC*8 - 1) / (PC*8);
  logic clk = 0, rst_n = 1;
  logic cfg_we = 0, start = 0, ic_en = 0, busy, done;
  logic [4:0] cfg_idx = 0;
  layer_desc_t cfg_desc, cur;
  logic [7:0] n_layers = 0, l_bayes = 0;
  logic [15:0] s_samples = 0;
  logic cmd_valid, cmd_ready, mask_valid = 0, mask_pop;
  logic [31:0] cmd_addr, cmd_len;
  dst_e cmd_dst;
  logic [15:0] tag_count = 0, outq_count = 0, res_count = 0;
  logic pe_valid, pe_first, pe_last, pe_zero, tag_push, do_en;
  logic [11:0] ib_raddr;
  logic [6:0] wb_raddr;
  logic [31:0] tag_addr;
  logic ev_ic_skip, ev_out_stall, ev_res_stall, ev_mask_stall;

  controller #(.PF(PF), .PC(PC), .MAX_LAYERS(32), .IB_DEPTH(4096), .WB_DEPTH(128), .OUTQ_DEPTH(4)) dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_desc, .start, .n_layers, .l_bayes, .s_samples, .ic_en,
    .busy, .done, .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .cmd_dst, .mask_valid, .mask_pop,
    .tag_count, .outq_count, .res_count, .pe_valid, .pe_first, .pe_last, .pe_zero, .ib_raddr,
    .wb_raddr, .tag_push, .tag_addr, .cur, .do_en, .ev_ic_skip, .ev_out_stall, .ev_res_stall, .ev_mask_stall
  );

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge
  int checks = 0, failures = 0, cyc = 0, n_skip = 0, n_ost = 0, n_rst = 0, n_mst = 0, n_pops = 0, n_done = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // expected streams
  logic [65:0] exp_cmd [$];       // {dst, len, addr}
  logic [22:0] exp_beat [$];      // {zero, first, last, wb, ib}
  logic [31:0] exp_tag [$];

  task automatic gen_layer(layer_desc_t d, int soff, bit skip_in);
    int gw = BNB + d.k*d.k*d.ct*PF;
    if (!skip_in) exp_cmd.push_back({DST_IBUF, 32'(d.h*d.w*d.ct), d.in_addr});
    for (int g = 0; g < d.fg; g++) begin
      exp_cmd.push_back({DST_BN, 32'(BNB), 32'(d.w_addr + g*gw)});
      exp_cmd.push_back({DST_WBUF, 32'(d.k*d.k*d.ct*PF), 32'(d.w_addr + g*gw + BNB)});
      for (int py = 0; py < d.ph; py++)
        for (int px = 0; px < d.pw; px++) begin
          if (d.sc_en) exp_cmd.push_back({DST_RES, 32'd1, 32'(d.res_addr + (py*d.pw + px)*d.fg + g)});
          for (int wy = 0; wy < d.pool; wy++)
            for (int wx = 0; wx < d.pool; wx++)
              for (int ky = 0; ky < d.k; ky++)
                for (int kx = 0; kx < d.k; kx++)
                  for (int c = 0; c < d.ct; c++) begin
                    int iy = (py*d.pool + wy)*d.stride + ky - d.pad;
                    int ix = (px*d.pool + wx)*d.stride + kx - d.pad;
                    bit z = iy < 0 || ix < 0 || iy >= d.h || ix >= d.w;
                    exp_beat.push_back({z, ky == 0 && kx == 0 && c == 0,
                                        ky == d.k-1 && kx == d.k-1 && c == d.ct-1,
                                        7'((ky*d.k + kx)*d.ct + c),
                                        z ? 12'd0 : 12'((iy*d.w + ix)*d.ct + c)});
                  end
          exp_tag.push_back(d.out_addr + soff + (py*d.pw + px)*d.fg + g);
        end
    end
  endtask

  // mock memory interface
  int busy_cnt = 0;
  int res_due [$];
  int tag_due [$];
  assign cmd_ready = (busy_cnt == 0);
  always @(posedge clk) begin
    cyc++;
    if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
    if (cmd_valid && cmd_ready) begin
      busy_cnt <= (cmd_dst == DST_RES) ? 2 : int'(cmd_len) + 3;
      if (cmd_dst == DST_RES) res_due.push_back(cyc + 6);
      checks++;
      if (exp_cmd.size() == 0) failures++;
      else begin
        logic [65:0] e;
        e = exp_cmd.pop_front();
        if ({cmd_dst, cmd_len, cmd_addr} != e) begin
          failures++; $display("FAIL cmd %0d %0d %h exp %h", cmd_dst, cmd_len, cmd_addr, e);
        end
      end
    end
    if (res_due.size() > 0 && res_due[0] <= cyc) begin void'(res_due.pop_front()); res_count <= res_count + 1; end
    if (tag_due.size() > 0 && tag_due[0] <= cyc) begin
      void'(tag_due.pop_front());
      tag_count <= tag_count - 1 + 16'(tag_push);
      if (cur.sc_en) res_count <= res_count - 1 + ((res_due.size() > 0 && res_due[0] <= cyc) ? 16'd1 : 16'd0);
    end else if (tag_push) tag_count <= tag_count + 1;
    if (tag_push) tag_due.push_back(cyc + 10);
    if (pe_valid) begin
      checks++;
      if (exp_beat.size() == 0) failures++;
      else begin
        logic [22:0] e;
        e = exp_beat.pop_front();
        if ({pe_zero, pe_first, pe_last, wb_raddr, pe_zero ? 12'd0 : ib_raddr} != e) begin
          failures++; if (failures < 10) $display("FAIL beat %b exp %b", {pe_zero, pe_first, pe_last, wb_raddr, ib_raddr}, e);
        end
      end
    end
    if (tag_push) begin
      checks++;
      if (exp_tag.size() == 0 || tag_addr != exp_tag.pop_front()) begin failures++; $display("FAIL tag %h", tag_addr); end
    end
    mask_valid <= ($urandom % 8) == 0;
    outq_count <= (cyc > 50 && cyc < 400) ? 16'd4 : 16'd0;   // a full output queue for a while
    n_skip += ev_ic_skip; n_ost += ev_out_stall; n_rst += ev_res_stall; n_mst += ev_mask_stall;
    n_pops += mask_pop; n_done += done;
  end

  layer_desc_t net [2];

  initial begin
    net[0] = '0; net[1] = '0;
    net[0].in_addr = 'h100; net[0].out_addr = 'h400; net[0].w_addr = 'h800;
    net[0].h = 5; net[0].w = 5; net[0].ph = 3; net[0].pw = 3; net[0].ct = 2; net[0].fg = 2;
    net[0].k = 3; net[0].stride = 2; net[0].pad = 1; net[0].pool = 1; net[0].relu_en = 1;
    net[1].in_addr = 'h400; net[1].out_addr = 'hA00; net[1].w_addr = 'hC00; net[1].res_addr = 'hE00;
    net[1].h = 4; net[1].w = 4; net[1].ph = 2; net[1].pw = 2; net[1].ct = 1; net[1].fg = 1;
    net[1].k = 1; net[1].stride = 1; net[1].pad = 0; net[1].pool = 2; net[1].sc_en = 1;
    gen_layer(net[0], 0, 0);
    for (int s = 0; s < 3; s++) gen_layer(net[1], s*4, s > 0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 2; i++) begin @(negedge clk) cfg_we = 1; cfg_idx = 5'(i); cfg_desc = net[i]; end
    @(negedge clk) cfg_we = 0;
    n_layers = 2; l_bayes = 1; s_samples = 3; ic_en = 1; start = 1;
    @(negedge clk) start = 0;
    check(busy, "busy after start");
    while (!done) @(negedge clk);
    repeat (20) @(negedge clk);
    check(exp_cmd.size() == 0 && exp_beat.size() == 0 && exp_tag.size() == 0,
          $sformatf("left over: %0d cmds %0d beats %0d tags", exp_cmd.size(), exp_beat.size(), exp_tag.size()));
    check(n_skip == 2, $sformatf("IC skips %0d", n_skip));
    check(n_pops == 3, $sformatf("mask pops %0d", n_pops));
    check(n_done == 1 && !busy, "done once");
    check(n_ost > 0 && n_rst > 0 && n_mst > 0, $sformatf("stalls out %0d res %0d mask %0d", n_ost, n_rst, n_mst));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
