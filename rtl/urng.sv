// urng: uniform pseudo-random number generator for one MCMC sampler.
//
// A xorshift32 generator (shifts 13, 17, 5) gives a new 32-bit uniform word
// every cycle in which `next` is high, so a sampler can draw one random
// number per clock. `seed_load` replaces the state with `seed`; a zero seed,
// which xorshift cannot leave, is replaced by a fixed non-zero constant.
// `rnd` is the current state and is valid in the same cycle.
//
// The paper asks for high-throughput uniform generators but does not say
// which kind; xorshift32 is this design's choice.
module urng (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        next,
  output logic [31:0] rnd
);
  localparam logic [31:0] DEFAULT_SEED = 32'h2545_F491;

  function automatic logic [31:0] xs32(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rnd <= DEFAULT_SEED;
    else if (seed_load) rnd <= (seed == 32'd0) ? DEFAULT_SEED : seed;
    else if (next)      rnd <= xs32(rnd);
  end
endmodule
