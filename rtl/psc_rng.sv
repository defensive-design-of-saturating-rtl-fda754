// psc_rng -- random number source of the probabilistic saturating counter.
//
// Every probabilistic update compares one fresh random number with a
// threshold. This block supplies that number. It is a 32-bit xorshift
// generator (x ^= x<<13; x ^= x>>17; x ^= x<<5), whose period is 2^32-1;
// the number offered is the top PROB_W bits of the state word. The choice
// of generator is this design's own: only its function, a uniformly
// distributed number per update, is part of the counter's definition.
//
// Interface and timing: rnd is valid in every cycle. When step is high at a
// rising clock edge the generator advances, so a consumer that uses rnd in
// the cycle it asserts step sees a new number in the next cycle. A
// synchronous active-low reset loads SEED, which must not be zero.
module psc_rng #(
  parameter int unsigned PROB_W = psc_pkg::PSC_PROB_W,
  parameter logic [31:0] SEED   = 32'h2545_F491
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              step,
  output logic [PROB_W-1:0] rnd
);

  logic [31:0] x_q, x1, x2, x3;

  always_comb begin
    x1 = x_q ^ (x_q << 13);
    x2 = x1 ^ (x1 >> 17);
    x3 = x2 ^ (x2 << 5);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)    x_q <= SEED;
    else if (step) x_q <= x3;
  end

  assign rnd = x_q[31 -: PROB_W];

  initial assert (SEED != 32'd0) else $error("psc_rng: SEED must be non-zero");

endmodule
