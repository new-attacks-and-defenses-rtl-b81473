// dedrp_rng: pseudo-random number source.
//
// Supplies the random values the bank needs: the new set mapping written into
// an iTable entry when it is refreshed, the new target key at each key swap,
// and the random choice of the replacement policy.
//
// How it works: a 64-bit xorshift generator (x ^= x<<13; x ^= x>>7;
// x ^= x<<17) that steps every cycle. Reset loads SEED, which must be nonzero.
//
// Interface and timing: rnd is the registered state; it changes every clock.
//
// The paper only says a random number generator is used. This generator is
// this design's choice; a product would use a true or cryptographic RNG.
module dedrp_rng #(
  parameter logic [63:0] SEED = 64'h9E3779B97F4A7C15
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [63:0] rnd
);

  function automatic logic [63:0] xorshift64(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd <= SEED;
    else        rnd <= xorshift64(rnd);
  end

endmodule
