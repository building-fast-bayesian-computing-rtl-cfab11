// mrf_processor: a reprogrammable Gibbs sampler for lattice Markov random fields.
//
// It solves dense matching problems such as stereo depth and optical flow. Each
// pixel (r, c) of a W x H lattice holds a hidden label x (a disparity or a
// displacement, one of L values). The posterior energy of label l at a pixel is
//     E(l) = Y[r,c][l] + sum over the 4-neighbours n of PAIR[l][x_n]
// where Y is the per-pixel vector of match scores (the data term f_E) and PAIR
// is the pairwise potential f_LP between adjacent labels. Both are loaded by
// the host, so the same engine serves any potential of this form (a truncated
// linear smoothness prior, a Potts model, 2-D motion labels ...). All energies
// are sign-magnitude words (sdc_pkg); sums saturate at the word's range.
//
// Schedule: pixels whose r + c is even are conditionally independent given the
// odd ones and vice versa, so a sweep is two phases. The paper's lattice can
// be updated fully in parallel or virtualised; this engine is virtualised: P
// Gibbs units (each a discrete_sample gate over L labels) update P pixels of
// the same parity and row per cycle, columns 2(gP+j) + ((r + phase) mod 2).
// One sweep takes 2 * H * W / (2P) cycles; no stall occurs. Pixels of one
// phase never neighbour each other, so a unit reads only labels that are not
// being written in that cycle.
//
// Interface: the host writes Y vectors, PAIR entries and initial labels through
// the cfg_* ports while the engine is idle, then pulses `start` with the sweep
// count. Every update cycle is reported on the sample stream (smp_*), which
// carries the P new labels, so a listener sees every posterior sample. `done`
// pulses once after the last update. rd_addr/rd_label read the current state.
// The paper gives the model, the two-phase schedule, the programmability and
// the sample stream; the lattice size, P, the memory organisation and the host
// interface are this design's choices.
module mrf_processor
  import sdc_pkg::*;
#(
  parameter int unsigned W    = 128,   // lattice width  (pixels)
  parameter int unsigned H    = 96,    // lattice height (pixels)
  parameter int unsigned L    = 16,    // labels per pixel
  parameter int unsigned P    = 8,     // parallel Gibbs units
  parameter logic [31:0] SEED = 32'hC0FF_EE01,
  localparam int unsigned LW  = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned AW  = $clog2(W * H),
  localparam int unsigned RW  = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned CWD = (W > 1) ? $clog2(W) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host configuration (only while idle)
  input  logic                 cfg_y_we,
  input  logic [AW-1:0]        cfg_y_addr,     // pixel index r*W + c
  input  energy_t [L-1:0]      cfg_y_data,     // data energies of the L labels
  input  logic                 cfg_pair_we,
  input  logic [LW-1:0]        cfg_pair_own,   // label of the updated pixel
  input  logic [LW-1:0]        cfg_pair_nb,    // label of the neighbour
  input  energy_t              cfg_pair_data,
  input  logic                 cfg_x_we,
  input  logic [AW-1:0]        cfg_x_addr,
  input  logic [LW-1:0]        cfg_x_data,     // initial label
  // control
  input  logic                 start,
  input  logic [15:0]          sweeps,         // sweeps to run (0 acts as 1)
  output logic                 busy,
  output logic                 done,
  // posterior sample stream
  output logic                 smp_valid,
  output logic [15:0]          smp_sweep,
  output logic                 smp_phase,
  output logic [RW-1:0]        smp_row,
  output logic [CWD-1:0]       smp_col0,       // column of unit 0; unit j is at col0 + 2j
  output logic [P-1:0][LW-1:0] smp_labels,
  // state read-back
  input  logic [AW-1:0]        rd_addr,
  output logic [LW-1:0]        rd_label
);

  localparam int unsigned G  = W / (2 * P);            // groups per row and phase
  localparam int unsigned GW = (G > 1) ? $clog2(G) : 1;

  // Storage
  energy_t [L-1:0] y_mem  [W*H];
  energy_t         pair   [L][L];
  logic [LW-1:0]   x_mem  [H][W];

  // Sequencer
  logic          running;
  logic [15:0]   sweep_cnt, sweep_last;
  logic          phase;
  logic [RW-1:0] row;
  logic [GW-1:0] grp;

  // Per-unit datapath
  logic [CWD-1:0]        col  [P];
  energy_t [L-1:0]       e_unit [P];
  logic [LW-1:0]         draw [P];

  always_comb begin
    for (int j = 0; j < P; j++) begin
      col[j] = CWD'(2 * (int'(grp) * P + j) + ((int'(row) + int'(phase)) % 2));
    end
  end

  always_comb begin
    for (int j = 0; j < P; j++) begin
      for (int l = 0; l < L; l++) begin
        int acc;
        acc = from_energy(y_mem[int'(row) * W + int'(col[j])][l]);
        if (row > 0)
          acc += from_energy(pair[l][x_mem[row - 1][col[j]]]);
        if (int'(row) < H - 1)
          acc += from_energy(pair[l][x_mem[row + 1][col[j]]]);
        if (col[j] > 0)
          acc += from_energy(pair[l][x_mem[row][col[j] - 1]]);
        if (int'(col[j]) < W - 1)
          acc += from_energy(pair[l][x_mem[row][col[j] + 1]]);
        e_unit[j][l] = to_energy(acc);
      end
    end
  end

  for (genvar j = 0; j < P; j++) begin : g_unit
    discrete_sample #(.K(L), .M(EM), .N(EN), .SEED(SEED + 32'h0101_0101 * j)) u_gate (
      .clk, .rst_n, .sample(running), .energy(e_unit[j]), .out(draw[j])
    );
  end

  // Configuration writes and state updates
  always_ff @(posedge clk) begin
    if (cfg_y_we && !running) y_mem[cfg_y_addr] <= cfg_y_data;
    if (cfg_pair_we && !running) pair[cfg_pair_own][cfg_pair_nb] <= cfg_pair_data;
    if (running) begin
      for (int j = 0; j < P; j++) x_mem[row][col[j]] <= draw[j];
    end else if (cfg_x_we) begin
      x_mem[32'(cfg_x_addr) / W][32'(cfg_x_addr) % W] <= cfg_x_data;
    end
  end

  always_comb rd_label = x_mem[32'(rd_addr) / W][32'(rd_addr) % W];

  wire last_grp   = (int'(grp) == G - 1);
  wire last_row   = (int'(row) == H - 1);
  wire last_cycle = last_grp && last_row && phase && (sweep_cnt == sweep_last);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running    <= 1'b0;
      done       <= 1'b0;
      sweep_cnt  <= '0;
      sweep_last <= '0;
      phase      <= 1'b0;
      row        <= '0;
      grp        <= '0;
      smp_valid  <= 1'b0;
    end else begin
      done      <= 1'b0;
      smp_valid <= running;
      if (!running) begin
        if (start) begin
          running    <= 1'b1;
          sweep_cnt  <= '0;
          sweep_last <= (sweeps == 16'd0) ? 16'd0 : sweeps - 16'd1;
          phase      <= 1'b0;
          row        <= '0;
          grp        <= '0;
        end
      end else begin
        if (last_cycle) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
        if (!last_grp) grp <= grp + 1'b1;
        else begin
          grp <= '0;
          if (!last_row) row <= row + 1'b1;
          else begin
            row <= '0;
            phase <= ~phase;
            if (phase) sweep_cnt <= sweep_cnt + 16'd1;
          end
        end
      end
    end
  end

  // Sample stream: the labels written this cycle, one cycle later.
  always_ff @(posedge clk) begin
    if (running) begin
      smp_sweep <= sweep_cnt;
      smp_phase <= phase;
      smp_row   <= row;
      smp_col0  <= col[0];
      for (int j = 0; j < P; j++) smp_labels[j] <= draw[j];
    end
  end

  assign busy = running;

  // Two units never touch adjacent pixels: all columns of a cycle share a parity.
  a_parity: assert property (@(posedge clk) disable iff (!rst_n)
      running |-> ((int'(row) + int'(col[P-1]) + int'(phase)) % 2 == 0))
    else $error("mrf_processor: update outside the active phase");

endmodule
