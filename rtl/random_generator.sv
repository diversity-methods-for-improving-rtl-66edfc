// random_generator: one seeded uniform random-number source for the noise generator bank.
//
// Each enabled clock cycle it advances a 32-bit xorshift state (x ^= x<<13; x ^= x>>17;
// x ^= x<<5) and presents the top RATE_W (18) bits as an unsigned fraction in [0,1). The
// emulator compares this fraction with the programmed threshold to decide whether an error
// occurs at a qubit. Loading a seed makes a run reproducible and lets different boards use
// disjoint sequences. A zero seed, which would lock the xorshift at zero, is replaced by a
// fixed non-zero constant.
//
// Interface: seed_load (one cycle) copies seed into the state; en advances it; rnd is the
// current state's top bits (valid in the same cycle, no extra latency).
//
// The 18-bit output and the configurable seed follow the emulator description, which calls
// the source a Gaussian noise generator yet says it yields values between 0 and 1 that are
// compared with an error-rate threshold; a uniform source is what that comparison needs, so a
// uniform xorshift generator is used here. The algorithm itself is this design's choice.
module random_generator
  import qec_pkg::*;
#(
  parameter logic [31:0] SEED_FIX = 32'h2545_F491  // used when the loaded seed is zero
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              seed_load,
  input  logic [31:0]       seed,
  input  logic              en,
  output logic [RATE_W-1:0] rnd
);

  logic [31:0] state;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] t;
    t = x ^ (x << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_ff @(posedge clk) begin
    if (rst)            state <= SEED_FIX;
    else if (seed_load) state <= (seed == '0) ? SEED_FIX : seed;
    else if (en)        state <= xorshift32(state);
  end

  assign rnd = state[31 -: RATE_W];

endmodule
