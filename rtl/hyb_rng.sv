// hyb_rng: random-number source for the subcache's random replacement.
//
// The subcache picks its victim uniformly at random among all of its
// entries. The paper leaves the generator to the implementer (a CSPRNG or a
// true RNG) and only asks that it can be reseeded at any time; reseeding
// needs no cache flush because randomness only picks victims and is never
// used to locate lines. This design uses a 64-bit xorshift generator
// (x ^= x<<13; x ^= x>>7; x ^= x<<17), which is statistically adequate but
// NOT cryptographically secure: replace it with a CSPRNG for deployment.
//
// Interface: the state advances every cycle; rnd is the upper 32 bits of the
// current state. seed_load loads seed on the next edge (a zero seed, which
// would lock xorshift, is replaced by a fixed constant). Reset loads the
// constant too.
module hyb_rng (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [63:0] seed,
  output logic [31:0] rnd
);

  localparam logic [63:0] DEFAULT_SEED = 64'h9E37_79B9_7F4A_7C15;

  logic [63:0] state_q;

  function automatic logic [63:0] step(logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          state_q <= DEFAULT_SEED;
    else if (seed_load)  state_q <= (seed == '0) ? DEFAULT_SEED : seed;
    else                 state_q <= step(state_q);
  end

  assign rnd = state_q[63:32];

endmodule
