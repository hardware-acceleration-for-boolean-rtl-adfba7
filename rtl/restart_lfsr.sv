// restart_lfsr -- pseudo-random starting beliefs for the random restart.
//
// A 32-bit xorshift generator (x ^= x<<13; x ^= x>>17; x ^= x<<5) advances on
// step. rand_llr is its low INIT_BITS bits read as a signed number, i.e. a
// log-odds uniform in [-2^(INIT_BITS-1), 2^(INIT_BITS-1)) LSB; with the
// default 6 bits and 1/16 nat per LSB the starting q(1) lies between about
// 0.12 and 0.88. seed_load loads a seed (a zero seed is replaced by a fixed
// non-zero one, since zero is a fixed point of the generator). Reset loads
// the fixed seed. The paper only asks for a random new starting point; the
// generator and the range are this design's choices.
module restart_lfsr
  import bpsat_pkg::*;
#(
  parameter int INIT_BITS = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        step,
  output llr_t        rand_llr
);

  localparam logic [31:0] DEFAULT_SEED = 32'h2545_F491;

  logic [31:0] state, nxt;

  always_comb begin
    nxt = state;
    nxt ^= nxt << 13;
    nxt ^= nxt >> 17;
    nxt ^= nxt << 5;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         state <= DEFAULT_SEED;
    else if (seed_load) state <= (seed == '0) ? DEFAULT_SEED : seed;
    else if (step)      state <= nxt;
  end

  assign rand_llr = W_LLR'($signed(state[INIT_BITS-1:0]));

endmodule
