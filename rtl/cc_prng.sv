// cc_prng: pseudo-random number source for replacement decisions.
//
// The source design draws the insertion division uniformly at random and
// uses random replacement inside the chosen set, but does not say how the
// randomness is produced. This design uses a 32-bit xorshift generator
// (x ^= x<<13; x ^= x>>17; x ^= x<<5) that advances on every clock cycle,
// so the value used by a request does not depend on the request itself.
// A hardware design would seed it from a true random number generator; here
// the seed is a parameter and is loaded at reset (a zero seed is replaced by
// a nonzero constant, since zero is a fixed point).
//
// Interface: rnd is the current 32-bit state; it changes every cycle.
module cc_prng #(
  parameter logic [31:0] SEED = 32'h1F2E_3D4C
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [31:0] rnd
);

  localparam logic [31:0] SEED_NZ = (SEED == 32'd0) ? 32'h2545_F491 : SEED;

  function automatic logic [31:0] step(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd <= SEED_NZ;
    else        rnd <= step(rnd);
  end

endmodule
