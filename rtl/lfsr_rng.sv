// lfsr_rng: pseudo-random number source for one tile.
//
// The paper relies on a random number generator that the NI already has for
// its cryptographic work, and reuses it for the chaffing decisions. It does not
// say how that generator is built. This block is the simplest stand-in: a
// 32-bit Galois LFSR (taps x^32 + x^22 + x^2 + x + 1, polynomial 0x80200003)
// that advances one step every clock cycle while `en` is high. Every consumer
// takes its own slice of `rnd`, so one generator serves a whole tile.
//
// Interface: SEED (non-zero) is loaded at reset; `rnd` is the current state,
// registered, new every enabled cycle. Not cryptographically strong: a true
// random source would replace it in a secure implementation.
module lfsr_rng #(
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);

  localparam logic [31:0] POLY = 32'h8020_0003;
  localparam logic [31:0] SEED_NZ = (SEED == 32'h0) ? 32'h1 : SEED;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= SEED_NZ;
    else if (en) rnd <= rnd[0] ? ((rnd >> 1) ^ POLY) : (rnd >> 1);
  end

endmodule
