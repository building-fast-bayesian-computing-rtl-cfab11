// discrete_sample: the DISCRETE-SAMPLE gate.
//
// Given K energies e_1..e_K (unnormalised natural-log probabilities) it draws
// an index i with probability exp(e_i) / sum_k exp(e_k), as the paper's gate
// does: renormalise, exponentiate, sample. Energies use the sign-magnitude
// M.N fixed-point code (see sdc_pkg). The paper gives the gate's function,
// ports and number format; the datapath below is this design's:
//   1. convert to two's complement and find the largest energy e_max;
//   2. d_i = e_max - e_i >= 0; w_i = round(2^WB * exp(-d_i)) from a table
//      computed at elaboration, so the top outcome weighs exactly 2^WB and
//      weights below 1/2 LSB become 0 (low-entropy inputs stay exact);
//   3. prefix sums S_i of the weights; a 32-bit uniform word u gives the
//      threshold t = floor(u * S_K / 2^32), and the output is the first i with
//      S_i > t.
// The gate is combinational from ENERGY-IN to OUT, given its random word.
// A high `sample` at a clock edge steps the internal xorshift32, so OUT shows
// a new independent draw on the next cycle (a sample is triggered by the
// randomness source updating). WB is this design's choice.
module discrete_sample #(
  parameter int unsigned K    = 16,            // number of outcomes
  parameter int unsigned M    = 8,             // integer bits of an energy (sign included)
  parameter int unsigned N    = 4,             // fraction bits of an energy
  parameter int unsigned WB   = 16,            // fraction bits of an exponentiated weight
  parameter logic [31:0] SEED = 32'h0BAD_5EED,
  localparam int unsigned OW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sample,              // SAMPLE: step the random source
  input  logic [K-1:0][M+N-1:0] energy,             // ENERGY-IN_1..K, sign-magnitude
  output logic [OW-1:0]        out                  // OUT: index of the drawn outcome
);

  localparam int unsigned EWD = M + N;              // energy word width
  localparam int unsigned DW  = EWD + 1;            // width of e_max - e_i
  // exp(-d) < 2^-(WB+1) beyond d = (WB+1) ln 2: those weights round to zero.
  localparam int unsigned NLUT = int'((WB + 1) * 0.6931471805599453 * (1 << N)) + 2;
  localparam int unsigned SW  = WB + 1 + $clog2(K + 1);   // prefix-sum width

  typedef logic [WB:0] weight_t;
  typedef weight_t     lut_t [NLUT];

  // Exponential table, evaluated once at elaboration: LUT[d] = round(2^WB * exp(-d / 2^N)).
  function automatic lut_t make_lut();
    lut_t t;
    for (int unsigned d = 0; d < NLUT; d++)
      t[d] = weight_t'($rtoi($exp(-(real'(d) / real'(1 << N))) * real'(64'd1 << WB) + 0.5));
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  function automatic logic signed [EWD:0] to_tc(logic [EWD-1:0] e);
    logic signed [EWD:0] mag;
    mag = $signed({2'b00, e[EWD-2:0]});
    return e[EWD-1] ? -mag : mag;
  endfunction

  logic [31:0] u;
  xorshift32 #(.SEED(SEED)) u_rng (.clk, .rst_n, .advance(sample), .rnd(u));

  logic signed [EWD:0] e_tc [K];
  logic signed [EWD:0] e_max;
  weight_t             w    [K];
  logic [SW-1:0]       psum [K];
  logic [SW-1:0]       thresh;

  always_comb begin
    for (int i = 0; i < K; i++) e_tc[i] = to_tc(energy[i]);
    e_max = e_tc[0];
    for (int i = 1; i < K; i++) if (e_tc[i] > e_max) e_max = e_tc[i];
    for (int i = 0; i < K; i++) begin
      logic [DW-1:0] d;
      d = DW'(e_max - e_tc[i]);
      w[i] = (32'(d) < NLUT) ? LUT[d[$clog2(NLUT)-1:0]] : '0;
    end
    psum[0] = SW'(w[0]);
    for (int i = 1; i < K; i++) psum[i] = psum[i-1] + SW'(w[i]);
    thresh = SW'((64'(u) * 64'(psum[K-1])) >> 32);
    out = OW'(K - 1);
    for (int i = K - 1; i >= 0; i--) if (psum[i] > thresh) out = OW'(i);
  end

endmodule
