// rng: pseudo-random number source of the annealing logic (xorshift32).
//
// It supplies the random initial spins, the random choice of spins to flip
// and the random number r against which a positive E_inc is compared. Every
// cycle with en high the state advances by x ^= x << 13; x ^= x >> 17;
// x ^= x << 5. seed_load (priority over en) loads seed, with 0 replaced by 1
// because 0 is a fixed point. rnd is the registered state. The paper asks
// for random numbers only; the xorshift32 generator is this design's choice.
module rng (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        en,
  output logic [31:0] rnd
);

  logic [31:0] x1, x2, x3;

  always_comb begin
    x1 = rnd ^ (rnd << 13);
    x2 = x1 ^ (x1 >> 17);
    x3 = x2 ^ (x2 << 5);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rnd <= 32'd1;
    else if (seed_load) rnd <= (seed == 32'd0) ? 32'd1 : seed;
    else if (en)        rnd <= x3;
  end

endmodule
