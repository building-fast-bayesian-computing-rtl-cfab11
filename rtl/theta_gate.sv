// theta_gate: the THETA stochastic gate, a coin with an m-bit programmable bias.
//
// The output is 1 with probability theta / 2^M. It works as the paper draws it:
// M uniformly random bits are compared with the coin weight, and the output is
// (rnd < theta). The gate itself is combinational; a new sample appears
// whenever its random source changes (the source is outside, so several gates
// can share or split one generator). theta = 0 never fires; the largest weight
// gives probability 1 - 2^-M. The width M is this design's choice.
module theta_gate #(
  parameter int unsigned M = 8
) (
  input  logic [M-1:0] theta,   // coin weight, probability theta / 2^M
  input  logic [M-1:0] rnd,     // M fresh uniform random bits
  output logic         out      // Bernoulli(theta / 2^M) sample
);

  always_comb out = (rnd < theta);

endmodule
