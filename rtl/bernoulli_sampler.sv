// bernoulli_sampler: generates the filter-wise Monte Carlo Dropout masks.
//
// N_LFSR 128-bit LFSRs each give one bit per cycle with probability 1/2; an AND
// of their outputs is 1 with probability 2^-N_LFSR, so the default of two LFSRs
// gives the dropout rate p = 0.25 used throughout the paper.  A 1 means "drop
// this filter".  A SIPO collects PF such bits into one PF-bit mask (bit f is
// filter f of the group the engine is processing) and pushes it into a FIFO
// that caches masks until the dropout unit pops one.  This structure (LFSRs,
// AND gate, SIPO, FIFO) follows the paper; the stall rule below is this
// design's choice.
//
// The LFSRs and the SIPO advance only while the FIFO has room, so the n-th mask
// popped is always built from LFSR steps n*PF .. n*PF+PF-1, whatever the timing
// of the pops.  After reset a mask is ready after PF cycles.
//
// Interface: seed holds one 128-bit seed per LFSR (loaded during reset);
// mask_pop takes the head mask when mask_valid is high.
module bernoulli_sampler #(
  parameter int unsigned PF         = 64,
  parameter int unsigned N_LFSR     = 2,
  parameter int unsigned N_REG      = 128,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [N_LFSR*N_REG-1:0]     seed,
  input  logic                        mask_pop,
  output logic                        mask_valid,
  output logic [PF-1:0]               mask,
  output logic [$clog2(FIFO_DEPTH):0] level
);
  logic              en, full, empty, word_valid;
  logic [N_LFSR-1:0] bits;
  logic [PF-1:0]     word;

  assign en = !full;

  for (genvar i = 0; i < N_LFSR; i++) begin : g_lfsr
    lfsr #(.N_REG(N_REG)) u_lfsr (
      .clk, .rst_n, .en,
      .seed (seed[i*N_REG +: N_REG]),
      .bit_o(bits[i])
    );
  end

  sipo #(.WIDTH(PF)) u_sipo (
    .clk, .rst_n,
    .in_valid  (en),
    .in_bit    (&bits),
    .word_valid(word_valid),
    .word      (word)
  );

  sync_fifo #(.WIDTH(PF), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push (word_valid),
    .din  (word),
    .pop  (mask_pop && !empty),
    .dout (mask),
    .full (full),
    .empty(empty),
    .count(level)
  );

  assign mask_valid = !empty;
endmodule
