// tb_bnn_accel: end-to-end test of the accelerator at its default size
// (PF = PC = 64, PV = 1).
//
// A three-layer network is placed in the memory model:
//   layer 0: 11x11x64 input, 3x3 conv, stride 2, pad 1, 128 filters (two
//            filter groups), ReLU, 2x2 max pool -> 3x3x128
//   layer 1: 1x1 conv over 128 channels (two channel tiles), 64 filters, ReLU,
//            shortcut addition of a 3x3x64 operand -> 3x3x64
//   layer 2: 3x3 conv without padding (a fully connected layer) -> 1x1x64
// and run twice:
//   run A: intermediate-layer caching on, last layer Bayesian (L = 1), S = 3;
//   run B: caching off, last two layers Bayesian (L = 2), S = 2.
// A reference model in this file replays the same schedule on a copy of the
// memory with its own arithmetic and its own model of the two LFSRs, and every
// word the accelerator wrote is compared.  The testbench also checks the
// number of engine beats and memory reads against the formulas, and counts
// that each mechanism happened: input reuse (IC), dropped filters, zero
// padding, pooling, shortcut waits, output-queue stalls, a full mask FIFO.
module tb_bnn_accel;
  import bnn_pkg::*;
  localparam int PF = 64, PC = 64, BUS_W = PC*DW, DEPTH = 32768;
  localparam int BN_BEATS = PF*64/BUS_W;

  logic clk = 0, rst_n = 1;
  logic cfg_we = 0, start = 0, ic_en = 0, busy, done;
  logic [6:0] cfg_idx = 0;
  layer_desc_t cfg_desc;
  logic [7:0] n_layers = 0, l_bayes = 0;
  logic [15:0] s_samples = 0;
  logic [255:0] seed;
  logic m_rd_req, m_rd_gnt, m_rd_valid, m_wr_req, m_wr_gnt;
  logic [31:0] m_rd_addr, m_wr_addr;
  logic [BUS_W-1:0] m_rd_data, m_wr_data;
  logic ev_ic_skip, ev_out_stall, ev_res_stall, ev_mask_stall;

  bnn_accel dut (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_desc, .start, .n_layers, .l_bayes, .s_samples,
    .ic_en, .seed, .busy, .done,
    .m_rd_req, .m_rd_addr, .m_rd_gnt, .m_rd_valid, .m_rd_data,
    .m_wr_req, .m_wr_addr, .m_wr_data, .m_wr_gnt,
    .ev_ic_skip, .ev_out_stall, .ev_res_stall, .ev_mask_stall
  );

  ddr_model #(.BUS_W(BUS_W), .DEPTH(DEPTH), .LAT(12), .GNT_PCT(70)) mem (
    .clk, .rd_req(m_rd_req), .rd_addr(m_rd_addr), .rd_gnt(m_rd_gnt), .rd_valid(m_rd_valid),
    .rd_data(m_rd_data), .wr_req(m_wr_req), .wr_addr(m_wr_addr), .wr_data(m_wr_data), .wr_gnt(m_wr_gnt)
  );

  always #5 clk = ~clk;
  initial #2 rst_n = 0;             // reset edge

  int checks = 0, failures = 0;
  int n_ic = 0, n_outst = 0, n_resst = 0, n_beats = 0, n_pad = 0, n_fifo_full = 0, n_dropped = 0;
  int n_pool = 0, n_sc = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    n_ic    += ev_ic_skip;
    n_outst += ev_out_stall;
    n_resst += ev_res_stall;
    n_beats += dut.pe_valid;
    n_pad   += dut.pe_valid && dut.pe_zero;
    n_fifo_full += dut.u_sampler.u_fifo.full;
    n_pool  += dut.pe_valid && dut.pe_last && dut.cur.pool > 1;
    n_sc    += dut.u_resq.pop;
  end

  task automatic check(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // ---------------- network ----------------
  layer_desc_t net [3];
  logic [BUS_W-1:0] mref [DEPTH];       // reference copy of the memory

  function automatic layer_desc_t mk(int ia, int oa, int wa, int ra, int h, int w, int ph, int pw,
                                     int ct, int fg, int k, int st, int pd, int pool, int sh,
                                     bit relu, bit sc);
    layer_desc_t d;
    d = '0;
    d.in_addr = ia; d.out_addr = oa; d.w_addr = wa; d.res_addr = ra;
    d.h = h; d.w = w; d.ph = ph; d.pw = pw; d.ct = ct; d.fg = fg; d.k = k;
    d.stride = st; d.pad = pd; d.pool = pool; d.bn_shift = sh; d.relu_en = relu; d.sc_en = sc;
    return d;
  endfunction

  function automatic logic [BUS_W-1:0] rand_word(int lo, int hi);
    logic [BUS_W-1:0] r;
    for (int i = 0; i < BUS_W/8; i++) r[i*8 +: 8] = 8'(lo + int'($urandom % (hi - lo + 1)));
    return r;
  endfunction

  task automatic fill_layer(layer_desc_t d);
    int gw = BN_BEATS + d.k * d.k * d.ct * PF;
    for (int g = 0; g < d.fg; g++) begin
      for (int b = 0; b < BN_BEATS; b++) begin
        logic [BUS_W-1:0] wd = '0;
        for (int e = 0; e < BUS_W/64; e++) begin
          wd[e*64 + 48 +: 16] = 16'(1 + $urandom % 64);
          wd[e*64 +: 32]      = 32'(int'($urandom % 4001) - 2000);
        end
        mem.mem[d.w_addr + g*gw + b] = wd;
      end
      for (int i = 0; i < d.k * d.k * d.ct * PF; i++)
        mem.mem[d.w_addr + g*gw + BN_BEATS + i] = rand_word(-8, 8);
    end
  endtask

  // ---------------- reference model ----------------
  logic [127:0] r0, r1;

  function automatic bit lstep(ref logic [127:0] r);
    bit o = r[127];
    r = {r[126:0], r[127] ^ r[126] ^ r[125] ^ r[120]};
    return o;
  endfunction

  function automatic logic [PF-1:0] next_mask();
    logic [PF-1:0] m;
    for (int i = 0; i < PF; i++) m[i] = lstep(r0) & lstep(r1);
    return m;
  endfunction

  function automatic int sb(int addr, int idx);
    return int'($signed(mref[addr][idx*8 +: 8]));
  endfunction

  function automatic int clip(longint v);
    return v > 127 ? 127 : (v < -128 ? -128 : int'(v));
  endfunction

  task automatic ref_layer(layer_desc_t d, int sample_off, bit bayes);
    int gw = BN_BEATS + d.k * d.k * d.ct * PF;
    for (int g = 0; g < d.fg; g++) begin
      logic [PF-1:0] m = bayes ? next_mask() : '0;
      n_dropped += $countones(m);
      for (int py = 0; py < d.ph; py++)
        for (int px = 0; px < d.pw; px++) begin
          logic [BUS_W-1:0] ow = '0;
          for (int f = 0; f < PF; f++) begin
            int best = -1000;
            int scale = int'($signed(mref[d.w_addr + g*gw + f/8][(f%8)*64 + 48 +: 16]));
            int bias  = int'($signed(mref[d.w_addr + g*gw + f/8][(f%8)*64 +: 32]));
            int y;
            for (int wy = 0; wy < d.pool; wy++)
              for (int wx = 0; wx < d.pool; wx++) begin
                longint acc = 0, v;
                int oy = py*d.pool + wy, ox = px*d.pool + wx;
                for (int ky = 0; ky < d.k; ky++)
                  for (int kx = 0; kx < d.k; kx++) begin
                    int iy = oy*d.stride + ky - d.pad, ix = ox*d.stride + kx - d.pad;
                    if (iy < 0 || ix < 0 || iy >= d.h || ix >= d.w) continue;
                    for (int c = 0; c < d.ct*PC; c++)
                      acc += sb(d.in_addr + (iy*d.w + ix)*d.ct + c/PC, c%PC) *
                             sb(d.w_addr + g*gw + BN_BEATS + ((ky*d.k + kx)*d.ct + c/PC)*PF + f, c%PC);
                  end
                v = acc * scale + bias;
                if (d.bn_shift != 0) v = (v + (longint'(1) << (d.bn_shift - 1))) >>> d.bn_shift;
                y = clip(v);
                if (d.relu_en && y < 0) y = 0;
                if (y > best) best = y;
              end
            if (d.sc_en) best = clip(best + sb(d.res_addr + (py*d.pw + px)*d.fg + g, f));
            if (m[f]) best = 0;
            ow[f*8 +: 8] = 8'(best);
          end
          mref[d.out_addr + sample_off + (py*d.pw + px)*d.fg + g] = ow;
        end
    end
  endtask

  function automatic int layer_beats(layer_desc_t d);
    return d.ph * d.pw * d.pool * d.pool * d.k * d.k * d.ct * d.fg;
  endfunction

  // run the schedule on the reference and on the hardware, then compare
  task automatic run(int n, int l, int s, bit ic, string name);
    int beats_exp = 0, reads_exp = 0, beats0 = n_beats, reads0 = mem.n_reads, ic0 = n_ic;
    for (int smp = 0; smp < s; smp++)
      for (int li = ((ic && smp > 0) ? n - l : 0); li < n; li++) begin
        layer_desc_t d = net[li];
        bit skip = ic && l == 1 && smp > 0 && li == n - 1;
        ref_layer(d, (li == n - 1) ? smp * d.ph * d.pw * d.fg : 0, li >= n - l);
        beats_exp += layer_beats(d);
        reads_exp += (skip ? 0 : d.h * d.w * d.ct)
                   + d.fg * (BN_BEATS + d.k * d.k * d.ct * PF)
                   + (d.sc_en ? d.ph * d.pw * d.fg : 0);
      end
    @(negedge clk);
    n_layers = 8'(n); l_bayes = 8'(l); s_samples = 16'(s); ic_en = ic; start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    check(n_beats - beats0 == beats_exp, $sformatf("%s: %0d engine beats, expected %0d", name, n_beats - beats0, beats_exp));
    check(mem.n_reads - reads0 == reads_exp, $sformatf("%s: %0d words read, expected %0d", name, mem.n_reads - reads0, reads_exp));
    if (ic && l == 1) check(n_ic - ic0 == s - 1, $sformatf("%s: input reused %0d times", name, n_ic - ic0));
    $display("%s: %0d engine beats, %0d words read", name, beats_exp, reads_exp);
    for (int a = 0; a < DEPTH; a++)
      if (mem.mem[a] !== mref[a]) begin
        checks++; failures++;
        if (failures < 20) $display("FAIL %s: word %h differs", name, a);
      end else if (a >= 'h2000 && a < 'h2000 + 18 || a >= 'h5000 && a < 'h5000 + 9 || a >= 'h7000 && a < 'h7000 + 3)
        checks++;
  endtask

  initial begin
    seed = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    r0 = seed[127:0]; r1 = seed[255:128];
    net[0] = mk('h0000, 'h2000, 'h1000, 0,      11, 11, 3, 3, 1, 2, 3, 2, 1, 2, 9, 1, 0);
    net[1] = mk('h2000, 'h5000, 'h3000, 'h4000,  3,  3, 3, 3, 2, 1, 1, 1, 0, 1, 7, 1, 1);
    net[2] = mk('h5000, 'h7000, 'h6000, 0,       3,  3, 1, 1, 1, 1, 3, 1, 0, 1, 10, 0, 0);
    for (int a = 0; a < DEPTH; a++) mem.mem[a] = '0;
    for (int a = 0; a < 121; a++) mem.mem[a] = rand_word(-20, 20);
    for (int a = 0; a < 9; a++)   mem.mem['h4000 + a] = rand_word(-60, 60);
    for (int i = 0; i < 3; i++) fill_layer(net[i]);
    for (int a = 0; a < DEPTH; a++) mref[a] = mem.mem[a];

    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      @(negedge clk) cfg_we = 1; cfg_idx = 7'(i); cfg_desc = net[i];
    end
    @(negedge clk) cfg_we = 0;

    mem.gnt_pct = 70;
    run(3, 1, 3, 1'b1, "run A (IC on, L=1, S=3)");
    mem.wr_pct = 0;                          // writes blocked for a while: output queue fills
    fork begin repeat (3000) @(posedge clk); mem.wr_pct = 70; end join_none
    run(3, 2, 2, 1'b0, "run B (IC off, L=2, S=2)");

    check(n_ic > 0,        "IC input reuse never happened");
    check(n_dropped > 0,   "no filter was dropped");
    check(n_pad > 0,       "zero padding never used");
    check(n_pool > 0,      "pooling never used");
    check(n_sc > 0,        "shortcut never used");
    check(n_resst > 0,     "never waited for a shortcut operand");
    check(n_outst > 0,     "output queue never stalled the engine");
    check(n_fifo_full > 0, "mask FIFO never full");
    $display("events: ic_reuse=%0d dropped_filters=%0d pad_beats=%0d pool_pixels=%0d shortcut=%0d res_wait=%0d out_stall=%0d mask_fifo_full=%0d mask_wait=%0d",
             n_ic, n_dropped, n_pad, n_pool, n_sc, n_resst, n_outst, n_fifo_full, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
