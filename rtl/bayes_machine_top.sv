// bayes_machine_top: a chip carrying the stochastic circuits side by side.
//
// Five independent engines share the clock and reset:
//   * mrf_processor - the depth/motion engine: Gibbs sampling of a W x H
//     lattice MRF with L labels, P units, host-loaded data and pairwise
//     energies, and a stream of posterior samples (mrf_* ports);
//   * abc_network   - the three-variable transition-circuit assembly for
//     P(A)P(B|A)P(C|A), with clamps and a serial/parallel/random-scan
//     schedule switch
//     (abc_* ports);
//   * binomial_gate - a parallel Binomial sampler built from THETA gates
//     (bin_* ports);
//   * spiking_sampler - a first-spike (lateral inhibition) sampler for one
//     discrete variable (spk_* ports);
//   * dpmm_learner  - the perceptual-learning engine: Gibbs sampling of a
//     Dirichlet process mixture over DP_D-pixel binary images (dp_* ports).
// Every engine keeps the interface and timing of its own module; the top adds
// no logic. Placing them on one die is this design's choice: the paper built
// its prototypes separately.
module bayes_machine_top
  import sdc_pkg::*;
#(
  parameter int unsigned MRF_W = 128,
  parameter int unsigned MRF_H = 96,
  parameter int unsigned MRF_L = 16,
  parameter int unsigned MRF_P = 8,
  parameter int unsigned SPK_K = 16,
  parameter int unsigned DP_D  = 256,
  parameter int unsigned DP_KMAX = 32,
  parameter int unsigned DP_NMAX = 1024,
  localparam int unsigned LW  = $clog2(MRF_L),
  localparam int unsigned AW  = $clog2(MRF_W * MRF_H),
  localparam int unsigned RW  = $clog2(MRF_H),
  localparam int unsigned CWD = $clog2(MRF_W),
  localparam int unsigned SKW = $clog2(SPK_K),
  localparam int unsigned DKW = $clog2(DP_KMAX),
  localparam int unsigned DNW = $clog2(DP_NMAX + 1),
  localparam int unsigned DIW = $clog2(DP_NMAX)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // MRF engine
  input  logic                     mrf_cfg_y_we,
  input  logic [AW-1:0]            mrf_cfg_y_addr,
  input  energy_t [MRF_L-1:0]      mrf_cfg_y_data,
  input  logic                     mrf_cfg_pair_we,
  input  logic [LW-1:0]            mrf_cfg_pair_own,
  input  logic [LW-1:0]            mrf_cfg_pair_nb,
  input  energy_t                  mrf_cfg_pair_data,
  input  logic                     mrf_cfg_x_we,
  input  logic [AW-1:0]            mrf_cfg_x_addr,
  input  logic [LW-1:0]            mrf_cfg_x_data,
  input  logic                     mrf_start,
  input  logic [15:0]              mrf_sweeps,
  output logic                     mrf_busy,
  output logic                     mrf_done,
  output logic                     mrf_smp_valid,
  output logic [15:0]              mrf_smp_sweep,
  output logic                     mrf_smp_phase,
  output logic [RW-1:0]            mrf_smp_row,
  output logic [CWD-1:0]           mrf_smp_col0,
  output logic [MRF_P-1:0][LW-1:0] mrf_smp_labels,
  input  logic [AW-1:0]            mrf_rd_addr,
  output logic [LW-1:0]            mrf_rd_label,
  // three-variable network
  input  logic                     abc_run,
  input  logic                     abc_parallel,
  input  logic                     abc_random_scan,
  input  logic [2:0]               abc_clamp,      // {C, B, A}
  input  logic [2:0]               abc_value,      // {C, B, A}
  output logic [2:0]               abc_state,      // {C, B, A}
  output logic                     abc_sweep_done,
  // Binomial sampler
  input  logic                     bin_sample,
  input  logic [7:0]               bin_theta,
  output logic [3:0]               bin_count,
  // spiking sampler
  input  logic                     spk_start,
  input  energy_t [SPK_K-1:0]      spk_energy,
  output logic [SPK_K-1:0]         spk_spikes,
  output logic                     spk_valid,
  output logic [SKW-1:0]           spk_value,
  output logic [15:0]              spk_ticks,
  // Dirichlet process mixture learner
  input  logic                     dp_clear,
  input  logic                     dp_pt_we,
  input  logic [DP_D-1:0]          dp_pt_data,
  input  logic                     dp_start,
  input  logic [15:0]              dp_sweeps,
  output logic                     dp_busy,
  output logic                     dp_done,
  output logic [DNW-1:0]           dp_num_points,
  output logic [DKW:0]             dp_num_clusters,
  output logic                     dp_asg_valid,
  output logic [DIW-1:0]           dp_asg_index,
  output logic [DKW-1:0]           dp_asg_cluster,
  input  logic [DKW-1:0]           dp_rd_cluster,
  output logic [DNW-1:0]           dp_rd_n,
  output logic [DP_D-1:0][DNW-1:0] dp_rd_counts
);

  mrf_processor #(.W(MRF_W), .H(MRF_H), .L(MRF_L), .P(MRF_P)) u_mrf (
    .clk, .rst_n,
    .cfg_y_we(mrf_cfg_y_we), .cfg_y_addr(mrf_cfg_y_addr), .cfg_y_data(mrf_cfg_y_data),
    .cfg_pair_we(mrf_cfg_pair_we), .cfg_pair_own(mrf_cfg_pair_own),
    .cfg_pair_nb(mrf_cfg_pair_nb), .cfg_pair_data(mrf_cfg_pair_data),
    .cfg_x_we(mrf_cfg_x_we), .cfg_x_addr(mrf_cfg_x_addr), .cfg_x_data(mrf_cfg_x_data),
    .start(mrf_start), .sweeps(mrf_sweeps), .busy(mrf_busy), .done(mrf_done),
    .smp_valid(mrf_smp_valid), .smp_sweep(mrf_smp_sweep), .smp_phase(mrf_smp_phase),
    .smp_row(mrf_smp_row), .smp_col0(mrf_smp_col0), .smp_labels(mrf_smp_labels),
    .rd_addr(mrf_rd_addr), .rd_label(mrf_rd_label)
  );

  abc_network u_abc (
    .clk, .rst_n, .run(abc_run), .parallel(abc_parallel), .random_scan(abc_random_scan),
    .clamp_a(abc_clamp[0]), .value_a(abc_value[0]),
    .clamp_b(abc_clamp[1]), .value_b(abc_value[1]),
    .clamp_c(abc_clamp[2]), .value_c(abc_value[2]),
    .a(abc_state[0]), .b(abc_state[1]), .c(abc_state[2]),
    .sweep_done(abc_sweep_done)
  );

  binomial_gate #(.NT(8), .M(8)) u_bin (
    .clk, .rst_n, .sample(bin_sample), .theta(bin_theta), .count(bin_count)
  );

  spiking_sampler #(.K(SPK_K)) u_spk (
    .clk, .rst_n, .start(spk_start), .energy(spk_energy), .spikes(spk_spikes),
    .valid(spk_valid), .value(spk_value), .ticks(spk_ticks)
  );

  dpmm_learner #(.D(DP_D), .KMAX(DP_KMAX), .NMAX(DP_NMAX)) u_dpmm (
    .clk, .rst_n, .clear(dp_clear), .pt_we(dp_pt_we), .pt_data(dp_pt_data),
    .start(dp_start), .sweeps(dp_sweeps), .busy(dp_busy), .done(dp_done),
    .num_points(dp_num_points), .num_clusters(dp_num_clusters),
    .asg_valid(dp_asg_valid), .asg_index(dp_asg_index), .asg_cluster(dp_asg_cluster),
    .rd_cluster(dp_rd_cluster), .rd_n(dp_rd_n), .rd_counts(dp_rd_counts)
  );

endmodule
