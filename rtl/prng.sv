// prng: pseudo-random source of the stream cipher's IV base.
//
// A 48-bit Fibonacci LFSR with the maximal-length polynomial
// x^48 + x^47 + x^21 + x^20 + 1. Each draw (`next`) clocks it 48 times in one
// cycle, so consecutive outputs share no shifted bits; the output is the
// register after the draw. A secure-world seed load (`seed_we`) restarts the
// sequence; a zero seed, which would lock an LFSR, is replaced by 1.
// The paper only names a PRNG; the LFSR, its polynomial and the 48-step draw
// are this design's choices. An LFSR is not a cryptographic generator: the IV
// only needs to be unique, not secret, since the key stays in a secure
// register.
//
// Timing: `rnd` holds the latest draw; a draw requested in cycle n is visible
// from cycle n+1.
module prng #(
  parameter int unsigned W = 48,
  parameter logic [W-1:0] SEED = W'(48'hACE1_5EED_0001)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         seed_we,
  input  logic [W-1:0] seed,
  input  logic         next,
  output logic [W-1:0] rnd
);

  logic [W-1:0] r_q, r_next;

  always_comb begin
    logic [W-1:0] r;
    r = r_q;
    for (int i = 0; i < W; i++) r = {r[W-2:0], r[47] ^ r[46] ^ r[20] ^ r[19]};
    r_next = r;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       r_q <= SEED;
    else if (seed_we) r_q <= (seed == '0) ? W'(1) : seed;
    else if (next)    r_q <= r_next;
  end

  assign rnd = r_q;

  initial assert (W == 48) else $error("prng: taps are for a 48-bit register");

endmodule
