// dpmm_learner: Gibbs sampler for a Dirichlet process mixture of binary images.
//
// Perceptual learning as clustering: each data point is a D-pixel binary image.
// Each cluster k keeps its size n_k and, for each pixel d, the number c_kd of
// its members with that pixel set. A point is reassigned with collapsed Gibbs
// sampling under a Chinese-restaurant prior and a Beta(1,1) prior on each
// pixel's probability. The point is first taken out of its cluster. Each
// cluster is then scored by
//   s_k = log n_k + sum_d log(x_d ? c_kd + 1 : n_k - c_kd + 1) - D log(n_k + 2)
// and one fresh (empty) cluster by
//   s_new = log alpha - D log 2
// The new assignment is drawn from these scores with a discrete_sample gate,
// and the counts are updated. The number of clusters is thus found during
// inference, not fixed in advance. All D pixels of a cluster are scored in
// parallel, through one log table and an adder tree each; this is the
// pixel-level parallelism the paper credits for most of its speed-up.
//
// The paper gives the model family, the binary image data, the online stream,
// the cluster tracking and the per-pixel parallelism. The memory
// organisation, the cluster bound KMAX, the point buffer NMAX, the
// hyperparameters and the fixed-point formats are this design's own.
// Scores are kept in two's complement with SF = 8 fraction bits. They are
// renormalised by their maximum before they are cut down to the gate's
// sign-magnitude energy code. The log table log(c + 1) is computed at
// elaboration.
//
// Interface and timing:
//   * Points are appended through pt_we / pt_data while the engine is idle,
//     up to NMAX of them. A new point is unassigned until its first visit,
//     where it is placed like any other point, so data can stream in between
//     runs.
//   * `start` runs `sweeps` passes over all stored points (0 counts as 1).
//     Each point takes KMAX + 2 cycles: one to take it out, KMAX to score the
//     clusters, one to draw and put it back.
//   * Every assignment appears on asg_*. `done` pulses at the end of a run.
//   * `num_clusters` counts the non-empty clusters. rd_* read a cluster's
//     counts, from which its pixel probabilities (c + 1) / (n + 2) follow.
//   * With all KMAX clusters in use, no new cluster can be opened.
//   * `clear` forgets all points and counts.
module dpmm_learner
  import sdc_pkg::*;
#(
  parameter int unsigned D         = 256,   // pixels per image
  parameter int unsigned KMAX      = 32,    // cluster slots
  parameter int unsigned NMAX      = 1024,  // stored points
  parameter int          LOG_ALPHA = 0,     // log of the concentration, 2^-8 nat units
  parameter logic [31:0] SEED      = 32'hD1A1_0001,
  localparam int unsigned KW = $clog2(KMAX),
  localparam int unsigned NW = $clog2(NMAX + 1),   // counter width
  localparam int unsigned IW = $clog2(NMAX)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 pt_we,
  input  logic [D-1:0]         pt_data,
  input  logic                 start,
  input  logic [15:0]          sweeps,
  output logic                 busy,
  output logic                 done,
  output logic [NW-1:0]        num_points,
  output logic [KW:0]          num_clusters,
  output logic                 asg_valid,
  output logic [IW-1:0]        asg_index,
  output logic [KW-1:0]        asg_cluster,
  input  logic [KW-1:0]        rd_cluster,
  output logic [NW-1:0]        rd_n,
  output logic [D-1:0][NW-1:0] rd_counts
);

  localparam int SF = 8;                            // score fraction bits
  typedef int unsigned log_t [NMAX + 1];

  // log(c + 1) in 2^-SF units, c = 0..NMAX
  function automatic log_t make_log();
    log_t t;
    for (int unsigned c = 0; c <= NMAX; c++)
      t[c] = int'($rtoi($ln(real'(c + 1)) * real'(1 << SF) + 0.5));
    return t;
  endfunction
  localparam log_t LOGT = make_log();

  typedef enum logic [1:0] {S_IDLE, S_REMOVE, S_SCORE, S_ASSIGN} state_t;

  state_t              st;
  logic [D-1:0]        pts   [NMAX];
  logic [KW:0]         asg   [NMAX];        // MSB set: not yet assigned
  logic [D-1:0][NW-1:0] cnt  [KMAX];      // one row of D pixel counters per cluster
  logic [NW-1:0]       nk    [KMAX];
  logic [IW-1:0]       idx;
  logic [15:0]         sweep_cnt, sweep_last;
  logic [KW-1:0]       kscan;
  logic                new_taken;
  int                  score [KMAX];
  logic [KMAX-1:0]     valid;

  logic [D-1:0]        x;
  logic [KW:0]         z_old;
  assign x     = pts[idx];
  assign z_old = asg[idx];

  // Score of cluster kscan for point x (combinational, all pixels in parallel)
  int  s_k;
  always_comb begin
    int sum;
    logic [NW-1:0] n;
    n   = nk[kscan];
    sum = 0;
    for (int d = 0; d < D; d++) begin
      logic [NW-1:0] v;
      v = x[d] ? cnt[kscan][d] : n - cnt[kscan][d];
      sum += int'(LOGT[v]);
    end
    s_k = sum - int'(D) * int'(LOGT[n + 1'b1])
        + ((n == 0) ? LOG_ALPHA : int'(LOGT[n - 1'b1]));
  end

  // Renormalise by the best valid score and cut to the gate's energy code
  energy_t [KMAX-1:0] e_k;
  logic    [KW-1:0]   draw;
  always_comb begin
    int smax;
    smax = -(1 << 30);
    for (int k = 0; k < KMAX; k++) if (valid[k] && score[k] > smax) smax = score[k];
    for (int k = 0; k < KMAX; k++) begin
      int diff;
      diff = (smax - score[k]) >>> (SF - EN);
      e_k[k] = valid[k] ? to_energy(-diff) : to_energy(-EMAXMAG);
    end
  end

  discrete_sample #(.K(KMAX), .M(EM), .N(EN), .SEED(SEED)) u_gate (
    .clk, .rst_n, .sample(st == S_ASSIGN), .energy(e_k), .out(draw)
  );

  wire last_point = (32'(idx) == 32'(num_points) - 1);

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      st         <= S_IDLE;
      num_points <= '0;
      idx        <= '0;
      kscan      <= '0;
      sweep_cnt  <= '0;
      sweep_last <= '0;
      new_taken  <= 1'b0;
      valid      <= '0;
      done       <= 1'b0;
      asg_valid  <= 1'b0;
      for (int k = 0; k < KMAX; k++) begin
        nk[k]  <= '0;
        cnt[k] <= '0;
      end
    end else begin
      done      <= 1'b0;
      asg_valid <= 1'b0;
      case (st)
        S_IDLE: begin
          if (pt_we && 32'(num_points) < NMAX) begin
            pts[num_points[IW-1:0]] <= pt_data;
            asg[num_points[IW-1:0]] <= {1'b1, KW'(0)};
            num_points <= num_points + 1'b1;
          end else if (start && num_points != 0) begin
            st         <= S_REMOVE;
            idx        <= '0;
            sweep_cnt  <= '0;
            sweep_last <= (sweeps == 0) ? 16'd0 : sweeps - 16'd1;
          end
        end
        S_REMOVE: begin
          if (!z_old[KW]) begin
            nk[z_old[KW-1:0]] <= nk[z_old[KW-1:0]] - 1'b1;
            for (int d = 0; d < D; d++)
              cnt[z_old[KW-1:0]][d] <= cnt[z_old[KW-1:0]][d] - NW'(x[d]);
          end
          kscan     <= '0;
          new_taken <= 1'b0;
          st        <= S_SCORE;
        end
        S_SCORE: begin
          score[kscan] <= s_k;
          if (nk[kscan] != 0) valid[kscan] <= 1'b1;
          else begin
            valid[kscan] <= !new_taken;      // only one empty slot stands for "new"
            new_taken    <= 1'b1;
          end
          kscan <= kscan + 1'b1;
          if (32'(kscan) == KMAX - 1) st <= S_ASSIGN;
        end
        S_ASSIGN: begin
          nk[draw]  <= nk[draw] + 1'b1;
          for (int d = 0; d < D; d++) cnt[draw][d] <= cnt[draw][d] + NW'(x[d]);
          asg[idx]  <= {1'b0, draw};
          asg_valid   <= 1'b1;
          asg_index   <= idx;
          asg_cluster <= draw;
          if (last_point) begin
            idx <= '0;
            if (sweep_cnt == sweep_last) begin
              st   <= S_IDLE;
              done <= 1'b1;
            end else begin
              sweep_cnt <= sweep_cnt + 1'b1;
              st        <= S_REMOVE;
            end
          end else begin
            idx <= idx + 1'b1;
            st  <= S_REMOVE;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    num_clusters = '0;
    for (int k = 0; k < KMAX; k++) num_clusters += (KW + 1)'(nk[k] != 0);
  end

  assign busy  = (st != S_IDLE);
  assign rd_n  = nk[rd_cluster];
  assign rd_counts = cnt[rd_cluster];

endmodule
