// mem_interface: connects the neural network engine to off-chip memory.
//
// Read side: the controller hands over one burst at a time (start word
// address, length in words, destination).  The interface issues one read
// request per word, accepts the in-order read responses and routes each word
// to its destination with a local index: input-buffer word i, weight-buffer
// word i/PF of filter i%PF, batch-norm beat i, or the shortcut FIFO.  A new
// burst is accepted (cmd_ready) only when every word of the previous one has
// returned.
// Write side: the head of the output queue is offered to memory; a granted
// write pops it.
// The paper only names this block; the request/grant memory port, the burst
// commands and the routing are this design's.
//
// Memory port (one word = BUS_W bits): a read request is taken on a cycle with
// m_rd_req and m_rd_gnt; responses come back in order, any number of cycles
// later, as m_rd_valid with m_rd_data.  A write is taken on a cycle with
// m_wr_req and m_wr_gnt.
module mem_interface
  import bnn_pkg::*;
#(
  parameter int unsigned BUS_W = 512,
  parameter int unsigned PF    = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  // burst command from the controller
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  logic [31:0]       cmd_len,
  input  dst_e              cmd_dst,
  // read data routed to the engine
  output logic [BUS_W-1:0]  d_data,
  output logic              ib_we,
  output logic [31:0]       ib_waddr,
  output logic              wb_we,
  output logic [31:0]       wb_waddr,
  output logic [$clog2(PF)-1:0] wb_wfilt,
  output logic              bn_we,
  output logic [31:0]       bn_beat,
  output logic              res_push,
  // output queue (show-ahead FIFO of {address, data})
  input  logic              wq_empty,
  input  logic [ADDR_W-1:0] wq_addr,
  input  logic [BUS_W-1:0]  wq_data,
  output logic              wq_pop,
  // off-chip memory
  output logic              m_rd_req,
  output logic [ADDR_W-1:0] m_rd_addr,
  input  logic              m_rd_gnt,
  input  logic              m_rd_valid,
  input  logic [BUS_W-1:0]  m_rd_data,
  output logic              m_wr_req,
  output logic [ADDR_W-1:0] m_wr_addr,
  output logic [BUS_W-1:0]  m_wr_data,
  input  logic              m_wr_gnt
);
  logic              busy;
  dst_e              dst;
  logic [ADDR_W-1:0] base;
  logic [31:0]       len, issued, recv, wa;
  logic [$clog2(PF)-1:0] wf;

  assign cmd_ready = !busy;
  assign m_rd_req  = busy && (issued < len);
  assign m_rd_addr = base + issued;

  assign d_data   = m_rd_data;
  assign ib_we    = m_rd_valid && dst == DST_IBUF;
  assign wb_we    = m_rd_valid && dst == DST_WBUF;
  assign bn_we    = m_rd_valid && dst == DST_BN;
  assign res_push = m_rd_valid && dst == DST_RES;
  assign ib_waddr = recv;
  assign bn_beat  = recv;
  assign wb_waddr = wa;
  assign wb_wfilt = wf;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; dst <= DST_IBUF; base <= '0; len <= '0;
      issued <= '0; recv <= '0; wa <= '0; wf <= '0;
    end else if (!busy) begin
      if (cmd_valid && cmd_len != 0) begin
        busy <= 1'b1; dst <= cmd_dst; base <= cmd_addr; len <= cmd_len;
        issued <= '0; recv <= '0; wa <= '0; wf <= '0;
      end
    end else begin
      if (m_rd_req && m_rd_gnt) issued <= issued + 1;
      if (m_rd_valid) begin
        recv <= recv + 1;
        if (wf == $clog2(PF)'(PF-1)) begin
          wf <= '0;
          wa <= wa + 1;
        end else begin
          wf <= wf + 1'b1;
        end
        if (recv + 1 == len) busy <= 1'b0;
      end
    end
  end

  // write side
  assign m_wr_req  = !wq_empty;
  assign m_wr_addr = wq_addr;
  assign m_wr_data = wq_data;
  assign wq_pop    = m_wr_req && m_wr_gnt;

  a_no_stray_data: assert property (@(posedge clk) disable iff (!rst_n) m_rd_valid |-> busy);
endmodule
