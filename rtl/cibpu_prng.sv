// cibpu_prng: pseudo-random number source for the BTB replacement algorithm.
//
// The paper draws the two candidate targets of its load-balancing replacement
// from two hardware secure random number generators and does not describe
// them.  This module is a stand-in with the same role: a 32-bit xorshift
// generator (x ^= x<<13; x ^= x>>17; x ^= x<<5) that advances on every cycle
// in which `en` is high.  It is not cryptographically secure; an entropy-based
// generator can replace it behind the same ports.
//
// Interface: clk, rst_n (active-low, synchronous to clk), en; rnd is the
// current state and changes one cycle after a cycle with en high.  Reset loads
// SEED, which must not be zero.
module cibpu_prng #(
  parameter logic [31:0] SEED = 32'h2545_f491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);

  logic [31:0] x1, x2, x3;

  always_comb begin
    x1 = rnd ^ (rnd << 13);
    x2 = x1 ^ (x1 >> 17);
    x3 = x2 ^ (x2 << 5);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= x3;
  end

  initial assert (SEED != 32'd0) else $error("cibpu_prng: SEED must be non-zero");

endmodule
