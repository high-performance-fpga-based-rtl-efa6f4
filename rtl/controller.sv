// controller: sequences the neural network engine layer by layer, filter group
// by filter group, pixel by pixel, and runs the Monte Carlo samples.
//
// A host writes one layer_desc_t per layer into the descriptor table, then
// pulses start with the layer count N, the number of Bayesian (dropout) layers
// L, the number of samples S and ic_en:
//   ic_en = 0 (standard inference): every sample runs all N layers;
//   ic_en = 1 (intermediate-layer caching): layers 0..N-L-1 run once, layers
//     N-L..N-1 run S times.  When L = 1 the last layer's input is still in the
//     input buffer for samples 1..S-1, so its reload is skipped.
// Dropout is enabled in the last L layers.  Sample s of the last layer writes
// its output at out_addr + s * (PH*PW*FG); averaging the samples is left to
// the host.  The execution order (layer by layer, IC, partial Bayesian last L
// layers) follows the paper; the descriptor table and everything below are
// this design's.
//
// For each layer: load the input map (unless cached); then for each filter
// group g: load the group's batch-norm entries and weights, pop a dropout mask
// if the layer is Bayesian, and for each pooled output pixel (py, px), for
// each position (wy, wx) of its pooling window, for each kernel position
// (ky, kx) and channel tile ct, issue one engine beat:
//   oy = py*pool + wy, iy = oy*stride + ky - pad (x likewise),
//   input word (iy*W + ix)*CT + ct (zero when outside the map),
//   weight word (ky*K + kx)*CT + ct.
// With a shortcut, the operand of each pooled pixel is read from memory when
// its first beat is issued.  A group ends when its last output has left the
// dropout unit; a layer ends when its outputs are written.
//
// Flow control: the beat that completes a pooled pixel is held back while the
// output queue plus the pixels in flight would exceed OUTQ_DEPTH, or while the
// pixel's shortcut operand has not arrived.  Each stall is reported on an
// ev_* pulse.
module controller
  import bnn_pkg::*;
#(
  parameter int unsigned PF         = 64,
  parameter int unsigned PC         = 64,
  parameter int unsigned MAX_LAYERS = 128,
  parameter int unsigned IB_DEPTH   = 16384,
  parameter int unsigned WB_DEPTH   = 128,
  parameter int unsigned OUTQ_DEPTH = 16
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
  output logic                          busy,
  output logic                          done,
  // memory interface commands
  output logic                          cmd_valid,
  input  logic                          cmd_ready,
  output logic [ADDR_W-1:0]             cmd_addr,
  output logic [31:0]                   cmd_len,
  output dst_e                          cmd_dst,
  // Bernoulli sampler
  input  logic                          mask_valid,
  output logic                          mask_pop,
  // datapath status
  input  logic [15:0]                   tag_count,
  input  logic [15:0]                   outq_count,
  input  logic [15:0]                   res_count,
  // engine beat
  output logic                          pe_valid,
  output logic                          pe_first,
  output logic                          pe_last,
  output logic                          pe_zero,
  output logic [$clog2(IB_DEPTH)-1:0]   ib_raddr,
  output logic [$clog2(WB_DEPTH)-1:0]   wb_raddr,
  output logic                          tag_push,
  output logic [ADDR_W-1:0]             tag_addr,
  // layer settings for the functional and dropout units
  output layer_desc_t                   cur,
  output logic                          do_en,
  // events
  output logic                          ev_ic_skip,
  output logic                          ev_out_stall,
  output logic                          ev_res_stall,
  output logic                          ev_mask_stall
);
  localparam int unsigned BN_BEATS = (PF*BN_ENTRY_W + PC*DW - 1) / (PC*DW);

  typedef enum logic [3:0] {
    S_IDLE, S_LAYER, S_LDIN, S_GROUP, S_LDBN, S_LDW, S_MASK,
    S_PIX, S_BEAT, S_DRAIN, S_LEND, S_CMDWAIT
  } state_e;

  state_e st, ret;
  layer_desc_t tbl [MAX_LAYERS];
  layer_desc_t nd;                 // descriptor of layer li

  logic [7:0]  n_r, l_r, li;
  logic [15:0] s_n, s;
  logic        ic_r;
  logic [7:0]  g, ct;
  logic [15:0] py, px;
  logic [3:0]  wy, wx, ky, kx;
  logic [31:0] out_base, group_words;

  // ---- address arithmetic for the current beat ----
  logic signed [31:0] oy, ox, iy, ix;
  logic               in_map, last_k, last_w, beat_ok;
  logic [31:0]        pix_idx;

  always_comb begin
    oy      = 32'(py) * 32'(cur.pool) + 32'(wy);
    ox      = 32'(px) * 32'(cur.pool) + 32'(wx);
    iy      = oy * 32'(cur.stride) + 32'(ky) - 32'(cur.pad);
    ix      = ox * 32'(cur.stride) + 32'(kx) - 32'(cur.pad);
    in_map  = iy >= 0 && ix >= 0 && iy < 32'(cur.h) && ix < 32'(cur.w);
    last_k  = (ct == cur.ct - 1) && (kx == cur.k - 1) && (ky == cur.k - 1);
    last_w  = (wx == cur.pool - 1) && (wy == cur.pool - 1);
    pix_idx = 32'(py) * 32'(cur.pw) + 32'(px);
  end

  // A beat that completes a pooled pixel needs output credit and, with a
  // shortcut, the pixel's operand.
  logic credit_ok, res_ok;
  assign credit_ok = (32'(tag_count) + 32'(outq_count)) < OUTQ_DEPTH;
  assign res_ok    = !cur.sc_en || (res_count > tag_count);
  assign beat_ok   = !(last_k && last_w) || (credit_ok && res_ok);

  assign pe_valid = (st == S_BEAT) && beat_ok;
  assign pe_first = (ct == 0) && (kx == 0) && (ky == 0);
  assign pe_last  = last_k;
  assign pe_zero  = !in_map;
  assign ib_raddr = in_map ? $clog2(IB_DEPTH)'((iy * 32'(cur.w) + ix) * 32'(cur.ct) + 32'(ct)) : '0;
  assign wb_raddr = $clog2(WB_DEPTH)'((32'(ky) * 32'(cur.k) + 32'(kx)) * 32'(cur.ct) + 32'(ct));
  assign tag_push = pe_valid && last_k && last_w;
  assign tag_addr = out_base + pix_idx * 32'(cur.fg) + 32'(g);

  assign do_en = (li >= n_r - l_r);
  assign busy  = (st != S_IDLE);

  assign ev_out_stall  = (st == S_BEAT) && last_k && last_w && !credit_ok;
  assign ev_res_stall  = (st == S_BEAT) && last_k && last_w && credit_ok && !res_ok;
  assign ev_mask_stall = (st == S_MASK) && do_en && !mask_valid;
  assign mask_pop      = (st == S_MASK) && do_en && mask_valid;

  assign nd = tbl[$clog2(MAX_LAYERS)'(li)];

  always_ff @(posedge clk) begin
    if (cfg_we) tbl[cfg_idx] <= cfg_desc;
  end

  // issue a memory burst and continue in state `r` once it has completed
  task automatic issue(input logic [ADDR_W-1:0] a, input logic [31:0] n, input dst_e d, input state_e r);
    cmd_valid <= 1'b1;
    cmd_addr  <= a;
    cmd_len   <= n;
    cmd_dst   <= d;
    ret       <= r;
    st        <= S_CMDWAIT;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret <= S_IDLE; done <= 1'b0;
      cmd_valid <= 1'b0; cmd_addr <= '0; cmd_len <= '0; cmd_dst <= DST_IBUF;
      n_r <= '0; l_r <= '0; s_n <= '0; ic_r <= 1'b0; li <= '0; s <= '0;
      g <= '0; ct <= '0; py <= '0; px <= '0; wy <= '0; wx <= '0; ky <= '0; kx <= '0;
      cur <= '0; out_base <= '0; group_words <= '0; ev_ic_skip <= 1'b0;
    end else begin
      done       <= 1'b0;
      ev_ic_skip <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          n_r <= n_layers; l_r <= l_bayes; s_n <= s_samples; ic_r <= ic_en;
          li <= '0; s <= '0;
          st <= S_LAYER;
        end

        S_LAYER: begin
          cur         <= nd;
          out_base    <= nd.out_addr +
                         ((li == n_r - 1) ? 32'(s) * (32'(nd.ph) * 32'(nd.pw) * 32'(nd.fg)) : 32'd0);
          group_words <= BN_BEATS + 32'(nd.k) * 32'(nd.k) * 32'(nd.ct) * PF;
          g  <= '0;
          st <= S_LDIN;
        end

        S_LDIN: begin
          if (ic_r && l_r == 8'd1 && s != 0 && li == n_r - 1) begin
            ev_ic_skip <= 1'b1;                       // input still on chip
            st <= S_GROUP;
          end else begin
            issue(cur.in_addr, 32'(cur.h) * 32'(cur.w) * 32'(cur.ct), DST_IBUF, S_GROUP);
          end
        end

        S_GROUP: st <= S_LDBN;

        S_LDBN: issue(cur.w_addr + 32'(g) * group_words, BN_BEATS, DST_BN, S_LDW);

        S_LDW: issue(cur.w_addr + 32'(g) * group_words + BN_BEATS,
                     32'(cur.k) * 32'(cur.k) * 32'(cur.ct) * PF, DST_WBUF, S_MASK);

        S_MASK: begin
          if (!do_en) st <= S_PIX;
          else if (mask_valid) st <= S_PIX;           // mask captured by mask_pop
          py <= '0; px <= '0; wy <= '0; wx <= '0; ky <= '0; kx <= '0; ct <= '0;
        end

        // first beat of a pooled pixel: fetch its shortcut operand
        // (the beats go ahead while the operand is on its way)
        S_PIX: begin
          if (!cur.sc_en) st <= S_BEAT;
          else if (!cmd_valid) begin
            cmd_valid <= 1'b1;
            cmd_addr  <= cur.res_addr + pix_idx * 32'(cur.fg) + 32'(g);
            cmd_len   <= 32'd1;
            cmd_dst   <= DST_RES;
          end else if (cmd_ready) begin
            cmd_valid <= 1'b0;
            st        <= S_BEAT;
          end
        end

        S_BEAT: if (beat_ok) begin
          // advance ct -> kx -> ky -> wx -> wy -> px -> py
          if (ct != cur.ct - 1) ct <= ct + 1'b1;
          else begin
            ct <= '0;
            if (kx != cur.k - 1) kx <= kx + 1'b1;
            else begin
              kx <= '0;
              if (ky != cur.k - 1) ky <= ky + 1'b1;
              else begin
                ky <= '0;
                if (wx != cur.pool - 1) wx <= wx + 1'b1;
                else begin
                  wx <= '0;
                  if (wy != cur.pool - 1) wy <= wy + 1'b1;
                  else begin
                    wy <= '0;
                    st <= S_PIX;
                    if (px != cur.pw - 1) px <= px + 1'b1;
                    else begin
                      px <= '0;
                      if (py != cur.ph - 1) py <= py + 1'b1;
                      else begin
                        py <= '0;
                        st <= S_DRAIN;
                      end
                    end
                  end
                end
              end
            end
          end
        end

        // wait until the group's last output has passed the dropout unit
        S_DRAIN: if (tag_count == 0) begin
          if (g != cur.fg - 1) begin
            g  <= g + 1'b1;
            st <= S_GROUP;
          end else begin
            st <= S_LEND;
          end
        end

        // wait until the layer's outputs are in memory, then pick the next layer
        S_LEND: if (outq_count == 0) begin
          if (li == n_r - 1) begin
            if (s == s_n - 1) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              s  <= s + 1'b1;
              li <= ic_r ? n_r - l_r : 8'd0;
              st <= S_LAYER;
            end
          end else begin
            li <= li + 1'b1;
            st <= S_LAYER;
          end
        end

        S_CMDWAIT: begin
          if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
          else if (!cmd_valid && cmd_ready) st <= ret;
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd_addr));
endmodule
