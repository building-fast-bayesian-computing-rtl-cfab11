// binomial_gate: a parallel Binomial(NT, theta / 2^M) sampler.
//
// NT THETA gates share one coin weight and each draws on its own M random bits;
// an adder sums their outputs, so `count` is a Binomial sample. This is the
// parallel composition of THETA gates and adders the paper shows. The random
// bits come from enough xorshift32 generators to supply NT*M bits per sample,
// each started from its own seed.
//
// Interface and timing: `count` is combinational in `theta` and the generator
// state. A high `sample` at a clock edge advances the generators, so the next
// cycle shows an independent draw. NT and M are this design's choices.
module binomial_gate #(
  parameter int unsigned NT   = 8,              // number of Bernoulli trials
  parameter int unsigned M    = 8,              // bits of the coin weight
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     sample,   // advance the random source
  input  logic [M-1:0]             theta,    // per-trial probability theta / 2^M
  output logic [$clog2(NT+1)-1:0]  count     // number of successes, 0..NT
);

  localparam int unsigned NGEN = (NT * M + 31) / 32;
  localparam int unsigned CW   = $clog2(NT + 1);

  logic [NGEN*32-1:0] pool;
  logic [NT-1:0]      hits;

  for (genvar g = 0; g < NGEN; g++) begin : g_gen
    xorshift32 #(.SEED(SEED ^ (32'h9E37_79B9 * (g + 1)))) u_rng (
      .clk, .rst_n, .advance(sample), .rnd(pool[g*32 +: 32])
    );
  end

  for (genvar t = 0; t < NT; t++) begin : g_trial
    theta_gate #(.M(M)) u_theta (
      .theta, .rnd(pool[t*M +: M]), .out(hits[t])
    );
  end

  always_comb begin
    count = '0;
    for (int t = 0; t < NT; t++) count = count + CW'(hits[t]);
  end

endmodule
