// sipo: serial-in parallel-out register that packs WIDTH consecutive bits into a
// word, here a PF-bit Monte Carlo dropout mask made of one Bernoulli bit per
// filter.
//
// Each cycle with in_valid high accepts in_bit.  The WIDTH-th accepted bit
// completes a word: in that same cycle word_valid is high and word holds the
// bits with the first one received in bit 0 (filter 0) and the current one in
// bit WIDTH-1.  The bit ordering is this design's choice.
module sipo #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_bit,
  output logic             word_valid,
  output logic [WIDTH-1:0] word
);
  localparam int unsigned CW = (WIDTH > 1) ? $clog2(WIDTH) : 1;
  logic [WIDTH-1:0] sr;
  logic [CW-1:0]    cnt;

  assign word       = {in_bit, sr[WIDTH-1:1]};
  assign word_valid = in_valid && (cnt == CW'(WIDTH-1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr  <= '0;
      cnt <= '0;
    end else if (in_valid) begin
      sr  <= word;
      cnt <= (cnt == CW'(WIDTH-1)) ? '0 : cnt + 1'b1;
    end
  end
endmodule
