// bnn_accel: FPGA-style accelerator for Bayesian neural networks inferred with
// Monte Carlo Dropout (MCD).
//
// One neural network engine (NNE) runs the network one layer at a time.  Its
// controller loads a layer's whole input map into the input buffer and the
// weights of PF filters into the weight buffer; the processing engine (PF
// units x PV pixels x PC channels of 8-bit multiply-accumulate) computes
// PF output channels of one pixel at a time; per filter a functional unit
// applies batch norm + requantisation, ReLU, max pooling and the shortcut
// addition; the dropout unit zeroes the filters that the Bernoulli sampler's
// mask drops; results are written back to off-chip memory through the memory
// interface, to be read back as the next layer's input.  The controller
// repeats the Bayesian last L layers S times, optionally with
// intermediate-layer caching (see controller.sv).
//
// The block structure (interface, Bernoulli sampler, NNE with input buffer,
// weight buffer, controller, PE, FU and DU) follows the paper; the memory port,
// host port and data layouts are this design's (see bnn_pkg.sv).  This top
// supports PV = 1 (the paper's configuration) and PF = PC, so that one output
// word of PF channels is one input word of the next layer.
//
// Pipeline of one beat: controller address (cycle t) -> buffer read (t+1) ->
// PE (output t+4 for a pixel's last beat) -> FU (t+8) -> DU (t+9) -> output
// queue -> memory write.
//
// Host port: write descriptors with cfg_we/cfg_idx/cfg_desc, then pulse start
// with n_layers, l_bayes, s_samples and ic_en; done pulses at the end.  The
// memory port is described in mem_interface.sv; one word is PC bytes.
module bnn_accel
  import bnn_pkg::*;
#(
  parameter int unsigned PF         = 64,
  parameter int unsigned PC         = 64,
  parameter int unsigned PV         = 1,
  parameter int unsigned IB_DEPTH   = 16384,
  parameter int unsigned WB_DEPTH   = 128,
  parameter int unsigned MAX_LAYERS = 128,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned OUTQ_DEPTH = 16,
  localparam int unsigned BUS_W     = PC*DW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host
  input  logic                          cfg_we,
  input  logic [$clog2(MAX_LAYERS)-1:0] cfg_idx,
  input  layer_desc_t                   cfg_desc,
  input  logic                          start,
  input  logic [7:0]                    n_layers,
  input  logic [7:0]                    l_bayes,
  input  logic [15:0]                   s_samples,
  input  logic                          ic_en,
  input  logic [2*128-1:0]              seed,
  output logic                          busy,
  output logic                          done,
  // off-chip memory
  output logic                          m_rd_req,
  output logic [ADDR_W-1:0]             m_rd_addr,
  input  logic                          m_rd_gnt,
  input  logic                          m_rd_valid,
  input  logic [BUS_W-1:0]              m_rd_data,
  output logic                          m_wr_req,
  output logic [ADDR_W-1:0]             m_wr_addr,
  output logic [BUS_W-1:0]              m_wr_data,
  input  logic                          m_wr_gnt,
  // events (one-cycle pulses)
  output logic                          ev_ic_skip,
  output logic                          ev_out_stall,
  output logic                          ev_res_stall,
  output logic                          ev_mask_stall
);
  localparam int unsigned EPB = BUS_W / BN_ENTRY_W;   // BN entries per beat
  localparam int unsigned QW  = $clog2(OUTQ_DEPTH);

  // ---------------- controller ----------------
  logic              cmd_valid, cmd_ready, mask_valid, mask_pop;
  logic [ADDR_W-1:0] cmd_addr;
  logic [31:0]       cmd_len;
  dst_e              cmd_dst;
  logic              pe_valid, pe_first, pe_last, pe_zero, tag_push, do_en;
  logic [$clog2(IB_DEPTH)-1:0] ib_raddr;
  logic [$clog2(WB_DEPTH)-1:0] wb_raddr;
  logic [ADDR_W-1:0] tag_addr;
  layer_desc_t       cur;
  logic [QW:0]       tag_cnt, outq_cnt;
  logic [QW+1:0]     res_cnt;

  controller #(
    .PF(PF), .PC(PC), .MAX_LAYERS(MAX_LAYERS), .IB_DEPTH(IB_DEPTH),
    .WB_DEPTH(WB_DEPTH), .OUTQ_DEPTH(OUTQ_DEPTH)
  ) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_desc, .start, .n_layers, .l_bayes,
    .s_samples, .ic_en, .busy, .done,
    .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .cmd_dst,
    .mask_valid, .mask_pop,
    .tag_count(16'(tag_cnt)), .outq_count(16'(outq_cnt)), .res_count(16'(res_cnt)),
    .pe_valid, .pe_first, .pe_last, .pe_zero, .ib_raddr, .wb_raddr,
    .tag_push, .tag_addr, .cur, .do_en,
    .ev_ic_skip, .ev_out_stall, .ev_res_stall, .ev_mask_stall
  );

  // ---------------- memory interface ----------------
  logic [BUS_W-1:0]  d_data;
  logic              ib_we, wb_we, bn_we, res_push, wq_empty, wq_pop;
  logic [31:0]       ib_waddr, wb_waddr, bn_beat;
  logic [$clog2(PF)-1:0] wb_wfilt;
  logic [ADDR_W+BUS_W-1:0] wq_head;

  mem_interface #(.BUS_W(BUS_W), .PF(PF)) u_if (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_addr, .cmd_len, .cmd_dst,
    .d_data, .ib_we, .ib_waddr, .wb_we, .wb_waddr, .wb_wfilt, .bn_we, .bn_beat, .res_push,
    .wq_empty, .wq_addr(wq_head[ADDR_W+BUS_W-1:BUS_W]), .wq_data(wq_head[BUS_W-1:0]), .wq_pop,
    .m_rd_req, .m_rd_addr, .m_rd_gnt, .m_rd_valid, .m_rd_data,
    .m_wr_req, .m_wr_addr, .m_wr_data, .m_wr_gnt
  );

  // ---------------- Bernoulli sampler ----------------
  logic [PF-1:0] mask_head, mask_q;

  bernoulli_sampler #(.PF(PF), .N_LFSR(2), .N_REG(128), .FIFO_DEPTH(FIFO_DEPTH)) u_sampler (
    .clk, .rst_n, .seed, .mask_pop, .mask_valid, .mask(mask_head), .level()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        mask_q <= '0;
    else if (mask_pop) mask_q <= mask_head;
  end

  // ---------------- buffers ----------------
  logic [BUS_W-1:0] ib_rdata [PV];
  logic [$clog2(IB_DEPTH)-1:0] ib_ra [PV];
  logic [BUS_W-1:0] wb_rdata [PF];

  assign ib_ra[0] = ib_raddr;

  input_buffer #(.PC(PC), .PV(PV), .DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .we(ib_we), .waddr($clog2(IB_DEPTH)'(ib_waddr)), .wdata(d_data),
    .raddr(ib_ra), .rdata(ib_rdata)
  );

  weight_buffer #(.PF(PF), .PC(PC), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .we(wb_we), .waddr($clog2(WB_DEPTH)'(wb_waddr)), .wfilt(wb_wfilt), .wdata(d_data),
    .raddr(wb_raddr), .rdata(wb_rdata)
  );

  // batch-norm parameters of the current filter group
  logic signed [15:0] bn_scale [PF];
  logic signed [31:0] bn_bias  [PF];

  always_ff @(posedge clk) begin
    if (bn_we)
      for (int e = 0; e < EPB; e++)
        if (32'(bn_beat) * EPB + e < PF) begin
          bn_scale[32'(bn_beat) * EPB + e] <= d_data[e*BN_ENTRY_W + 48 +: 16];
          bn_bias [32'(bn_beat) * EPB + e] <= d_data[e*BN_ENTRY_W      +: 32];
        end
  end

  // ---------------- processing engine ----------------
  logic                    b_valid, b_first, b_last, b_zero;
  logic signed [DW-1:0]    act [PV][PC];
  logic signed [DW-1:0]    wgt [PF][PC];
  logic                    pe_ovalid;
  logic signed [ACC_W-1:0] acc [PF][PV];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {b_valid, b_first, b_last, b_zero} <= '0;
    else        {b_valid, b_first, b_last, b_zero} <= {pe_valid, pe_first, pe_last, pe_zero};
  end

  always_comb begin
    for (int v = 0; v < PV; v++)
      for (int c = 0; c < PC; c++) act[v][c] = b_zero ? '0 : ib_rdata[v][c*DW +: DW];
    for (int f = 0; f < PF; f++)
      for (int c = 0; c < PC; c++) wgt[f][c] = wb_rdata[f][c*DW +: DW];
  end

  processing_engine #(.PF(PF), .PC(PC), .PV(PV)) u_pe (
    .clk, .rst_n, .in_valid(b_valid), .first(b_first), .last(b_last),
    .act, .wgt, .out_valid(pe_ovalid), .acc_o(acc)
  );

  // ---------------- functional units ----------------
  logic [BUS_W-1:0]     res_head;
  logic                 res_empty;
  logic                 fu_pvalid [PF][PV];
  logic                 fu_ovalid [PF][PV];
  logic signed [DW-1:0] fu_y [PF][PV];

  for (genvar f = 0; f < PF; f++) begin : g_fu
    for (genvar v = 0; v < PV; v++) begin : g_v
      functional_unit u_fu (
        .clk, .rst_n, .in_valid(pe_ovalid), .acc(acc[f][v]),
        .bn_scale(bn_scale[f]), .bn_bias(bn_bias[f]), .bn_shift(cur.bn_shift),
        .relu_en(cur.relu_en), .pool_n(8'(cur.pool) * 8'(cur.pool)),
        .sc_en(cur.sc_en), .res(res_head[f*DW +: DW]),
        .pool_valid(fu_pvalid[f][v]), .out_valid(fu_ovalid[f][v]), .y(fu_y[f][v])
      );
    end
  end

  sync_fifo #(.WIDTH(BUS_W), .DEPTH(2*OUTQ_DEPTH)) u_resq (
    .clk, .rst_n, .push(res_push), .din(d_data),
    .pop(fu_pvalid[0][0] && cur.sc_en), .dout(res_head),
    .full(), .empty(res_empty), .count(res_cnt)
  );

  // ---------------- dropout unit ----------------
  logic                 du_valid;
  logic signed [DW-1:0] du_y [PF][PV];

  dropout_unit #(.PF(PF), .PV(PV)) u_du (
    .clk, .rst_n, .in_valid(fu_ovalid[0][0]), .do_en, .mask(mask_q),
    .y_in(fu_y), .out_valid(du_valid), .y_out(du_y)
  );

  // ---------------- output queue ----------------
  logic [ADDR_W-1:0] tag_head;
  logic [BUS_W-1:0]  out_word;

  always_comb begin
    out_word = '0;
    for (int f = 0; f < PF; f++) out_word[f*DW +: DW] = du_y[f][0];
  end

  sync_fifo #(.WIDTH(ADDR_W), .DEPTH(OUTQ_DEPTH)) u_tagq (
    .clk, .rst_n, .push(tag_push), .din(tag_addr), .pop(du_valid), .dout(tag_head),
    .full(), .empty(), .count(tag_cnt)
  );

  sync_fifo #(.WIDTH(ADDR_W+BUS_W), .DEPTH(OUTQ_DEPTH)) u_outq (
    .clk, .rst_n, .push(du_valid), .din({tag_head, out_word}), .pop(wq_pop),
    .dout(wq_head), .full(), .empty(wq_empty), .count(outq_cnt)
  );

  initial assert (PV == 1 && PF == PC) else $error("bnn_accel: this top needs PV = 1 and PF = PC");
  a_res_present: assert property (@(posedge clk) disable iff (!rst_n)
                                  fu_pvalid[0][0] && cur.sc_en |-> !res_empty);
endmodule
