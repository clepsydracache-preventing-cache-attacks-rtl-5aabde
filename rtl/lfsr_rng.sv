// lfsr_rng -- pseudo-random source for TTL values and way selection.
//
// The cache proposal asks for uniformly random TTLs and random choice among
// empty entries (and random replacement on a conflict) but does not say how
// the randomness is made. This block is the simplest generator that serves:
// a 32-bit Galois LFSR with the maximal-length polynomial
// x^32 + x^22 + x^2 + x + 1 (period 2^32-1), advanced once per cycle.
// A hardened design would use a true random source instead.
//
// Interface: rnd is the current state, registered; it never becomes zero.
module lfsr_rng #(
  parameter logic [31:0] SEED = 32'hACE1_2468          // must be non-zero
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [31:0] rnd
);

  localparam logic [31:0] TAPS = 32'h8020_0003;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd <= SEED;
    else        rnd <= rnd[0] ? ((rnd >> 1) ^ TAPS) : (rnd >> 1);
  end

endmodule
