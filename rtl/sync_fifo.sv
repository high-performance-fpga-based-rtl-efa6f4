// sync_fifo: single-clock first-in first-out buffer with show-ahead output.
//
// Used as the mask FIFO at the end of the Bernoulli sampler (WIDTH = PF) and,
// in the accelerator top, for the output write queue, the shortcut operands and
// the output-address tags.  DEPTH must be a power of two.
//
// Interface: push writes din when not full; pop removes the head when not
// empty.  dout always shows the head entry; count is the number of entries.
// A push into a full FIFO or a pop from an empty one is an error (asserted).
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
      count <= count + (AW+1)'(push && !full) - (AW+1)'(pop && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);
  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH-1)) == 0) else $error("sync_fifo: DEPTH must be a power of two");
endmodule
