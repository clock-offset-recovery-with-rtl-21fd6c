// level_rng: pseudo-random source for the random level choice of the iQSync
// pattern generator.
//
// A 32-bit xorshift generator (x ^= x<<13; x ^= x>>17; x ^= x<<5). The state
// advances by one step in every cycle with `en` high; `rnd` is the current
// state and is valid from the cycle after reset or a seed load. A zero seed is
// replaced by a fixed non-zero constant, since zero is the one state xorshift
// never leaves.
//
// The paper's transmitter expanded random numbers with an AES-CTR core and
// notes that simpler generators should suffice; this design takes that
// simpler route. The generator is not cryptographic: the level choice only has
// to look random to the statistics of Bob's counter, not to an adversary.
module level_rng #(
  parameter logic [31:0] RESET_SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,   // load `seed` into the state
  input  logic [31:0] seed,
  input  logic        en,          // advance one step
  output logic [31:0] rnd          // current state
);

  logic [31:0] state;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         state <= RESET_SEED;
    else if (seed_load) state <= (seed == '0) ? RESET_SEED : seed;
    else if (en)        state <= xorshift32(state);
  end

  assign rnd = state;

  property p_nonzero;
    @(posedge clk) disable iff (!rst_n) state != '0;
  endproperty
  assert property (p_nonzero);

endmodule
