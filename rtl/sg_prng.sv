// sg_prng: pseudo-random word source for the SPOILER-GUARD mask generator.
//
// The paper draws masks from a Mersenne Twister in simulation and, in hardware,
// from a true random source expanded by a cryptographically secure PRNG; it does
// not give that generator's insides. This block is the simplest generator that
// does the job: a 64-bit xorshift (shifts 13, 7, 17), which is NOT cryptographically
// secure and stands in for the generator the paper names.
//
// Interface: seed_valid/seed load a new state (an all-zero seed is replaced by a
// fixed non-zero constant, since zero is a fixed point of xorshift). Each cycle
// with next=1 the state advances by one step. rnd shows the current state and is
// valid from the cycle after reset or seeding. Reset loads RESET_SEED.
module sg_prng #(
  parameter logic [63:0] RESET_SEED = 64'h9E37_79B9_7F4A_7C15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_valid,
  input  logic [63:0] seed,
  input  logic        next,
  output logic [63:0] rnd
);

  logic [63:0] state, step;

  function automatic logic [63:0] xorshift64(input logic [63:0] x);
    logic [63:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  assign step = xorshift64(state);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          state <= (RESET_SEED == 64'd0) ? 64'h1 : RESET_SEED;
    else if (seed_valid) state <= (seed == 64'd0) ? 64'h9E37_79B9_7F4A_7C15 : seed;
    else if (next)       state <= step;
  end

  assign rnd = state;

endmodule
