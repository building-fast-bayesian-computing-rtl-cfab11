// spiking_sampler: a discrete variable sampled by a race of spiking elements.
//
// One element per value i. Each element spikes at random with a rate
// proportional to exp(e_i), e_i being the value's energy (its unnormalised
// conditional log probability); the element that spikes first wins, the
// others being silenced by lateral inhibition, and its index is the new value.
// For exponential first-spike times this draws i with probability
// exp(e_i) / sum_k exp(e_k), the same law as the discrete-sample gate; this is
// the spiking route to a Gibbs transition that the paper sketches.
//
// This is a discrete-time digital version, and how it is built is this
// design's own choice. Time runs in clock ticks. In each tick element i fires
// with probability
//   q_i = 2^-RS * exp(e_i - e_max)
// through a THETA gate fed by its own 16 random bits. A tick with one spike
// ends the race. A tick in which several elements fire together is inhibited
// as a whole, and the race goes on. With geometric rather than exponential
// times, i wins with probability proportional to q_i / (1 - q_i). The top
// value's weight is therefore biased upward by at most 1 / (1 - 2^-RS),
// about 3 % for the default RS = 5.
//
// Interface and timing: a `start` pulse latches the energies. The race runs
// from the next cycle. `spikes` shows each tick's raster. When the race ends,
// `valid` pulses for one cycle with `value`, and `ticks` gives how many ticks
// the race took.
module spiking_sampler
  import sdc_pkg::*;
#(
  parameter int unsigned K    = 16,
  parameter int unsigned RS   = 5,             // rate scale: max spike probability 2^-RS per tick
  parameter logic [31:0] SEED = 32'h5713_0001,
  localparam int unsigned OW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  energy_t [K-1:0] energy,
  output logic [K-1:0]    spikes,       // spike raster of the current tick
  output logic            valid,
  output logic [OW-1:0]   value,
  output logic [15:0]     ticks
);

  localparam int unsigned WB   = 16;
  localparam int unsigned NLUT = int'((WB + 1) * 0.6931471805599453 * (1 << EN)) + 2;
  localparam int unsigned NGEN = (K * WB + 31) / 32;

  typedef logic [WB-1:0] rate_t;
  typedef rate_t         lut_t [NLUT];

  // Rate table: LUT[d] = round(2^(WB-RS) * exp(-d / 2^EN)).
  function automatic lut_t make_lut();
    lut_t t;
    for (int unsigned d = 0; d < NLUT; d++)
      t[d] = rate_t'($rtoi($exp(-(real'(d) / real'(1 << EN))) * real'(1 << (WB - RS)) + 0.5));
    return t;
  endfunction

  localparam lut_t LUT = make_lut();

  logic                racing;
  rate_t [K-1:0]       rate;
  logic [NGEN*32-1:0]  pool;
  logic [15:0]         tick_cnt;
  logic                lone;       // exactly one element spiked this tick

  always_comb begin
    int n;
    n = 0;
    for (int i = 0; i < K; i++) n += int'(spikes[i]);
    lone = (n == 1);
  end

  for (genvar g = 0; g < NGEN; g++) begin : g_gen
    xorshift32 #(.SEED(SEED ^ (32'h9E37_79B9 * (g + 1)))) u_rng (
      .clk, .rst_n, .advance(racing), .rnd(pool[g*32 +: 32])
    );
  end

  // One THETA gate per element: the per-tick spike decision.
  for (genvar i = 0; i < K; i++) begin : g_elem
    theta_gate #(.M(WB)) u_theta (.theta(rate[i]), .rnd(pool[i*WB +: WB]), .out(spikes[i]));
  end

  // Rates from the latched energies, normalised to the largest.
  function automatic rate_t [K-1:0] rates_of(energy_t [K-1:0] e);
    int v [K];
    int vmax;
    rate_t [K-1:0] r;
    vmax = from_energy(e[0]);
    for (int i = 0; i < K; i++) begin
      v[i] = from_energy(e[i]);
      if (v[i] > vmax) vmax = v[i];
    end
    for (int i = 0; i < K; i++)
      r[i] = (vmax - v[i] < NLUT) ? LUT[vmax - v[i]] : '0;
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      racing   <= 1'b0;
      valid    <= 1'b0;
      value    <= '0;
      ticks    <= '0;
      tick_cnt <= '0;
      rate     <= '0;
    end else begin
      valid <= 1'b0;
      if (start) begin
        racing   <= 1'b1;
        rate     <= rates_of(energy);
        tick_cnt <= '0;
      end else if (racing) begin
        tick_cnt <= tick_cnt + 16'd1;
        if (lone) begin       // a lone spike inhibits the rest and wins
          racing <= 1'b0;
          valid  <= 1'b1;
          ticks  <= tick_cnt + 16'd1;
          for (int i = 0; i < K; i++) if (spikes[i]) value <= OW'(i);
        end
      end
    end
  end

endmodule
