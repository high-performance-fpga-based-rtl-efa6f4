// lfsr: single-bit-output Fibonacci linear feedback shift register.
//
// N_REG registers R0..R(N_REG-1) form a loop: every enabled cycle each register
// takes the value of the one before it and R0 takes the XOR of the four taps
// R(N-1), R(N-2), R(N-3) and R(N-8).  For the default N_REG = 128 these are
// R127, R126, R125 and R120, the taps of the paper's 128-bit 4-tap LFSR.  The
// output bit is R(N-1); each bit is 1 with probability one half.
//
// Interface: `seed` is loaded during reset (an all-zero seed, which would lock
// the register, is replaced by 1).  `en` advances the register by one step; the
// output changes in the cycle after an enabled edge.
module lfsr #(
  parameter int unsigned N_REG = 128
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [N_REG-1:0] seed,
  output logic             bit_o
);
  logic [N_REG-1:0] r;      // r[i] is register Ri
  logic             fb;

  assign fb    = r[N_REG-1] ^ r[N_REG-2] ^ r[N_REG-3] ^ r[N_REG-8];
  assign bit_o = r[N_REG-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  r <= (seed == '0) ? N_REG'(1) : seed;
    else if (en) r <= {r[N_REG-2:0], fb};
  end

  initial assert (N_REG >= 8) else $error("lfsr: N_REG must be at least 8");
endmodule
