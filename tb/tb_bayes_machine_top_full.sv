// tb_bayes_machine_top_full: one complete operation of the chip at its default
// size (128 x 96 lattice, 16 labels, 8 Gibbs units; 256-pixel images, 32
// clusters, 1024 points; 16-element spiking sampler).
//
// Depth workload: the true depth map is a background whose label steps from
// 2 to 5 across the image, with a raised block of label 11. The data term of
// each pixel favours one label by 1.5 nats. That label is the true one,
// except at about 15 % of pixels, which favour a random wrong label. The
// pairwise table is a truncated linear smoothness prior, -1 nat per label of
// difference, capped at 2. Starting from the data's best labels, 10 sweeps
// must at least halve the error rate. The run must take 10 * 1536 cycles and
// stream every pixel once per sweep.
//
// Learning workload: 3 prototypes of 16 x 16 binary images (left, right and
// top half dark), 8 copies each with 6 pixels flipped, 8 sweeps. The result
// must be 3 clusters whose sizes sum to 24.
//
// The three-variable network, the Binomial sampler and the spiking sampler
// each do one short operation.
module tb_bayes_machine_top_full;
  import sdc_pkg::*;
  localparam int W = 128, H = 96, L = 16, P = 8, SK = 16, NPIX = W * H;
  localparam int SWEEPS = 10;
  logic clk = 0, rst_n = 0;
  logic mrf_cfg_y_we = 0, mrf_cfg_pair_we = 0, mrf_cfg_x_we = 0, mrf_start = 0;
  logic [13:0] mrf_cfg_y_addr = 0, mrf_cfg_x_addr = 0, mrf_rd_addr = 0;
  energy_t [L-1:0] mrf_cfg_y_data;
  logic [3:0] mrf_cfg_pair_own = 0, mrf_cfg_pair_nb = 0, mrf_cfg_x_data = 0, mrf_rd_label;
  energy_t mrf_cfg_pair_data = '0;
  logic [15:0] mrf_sweeps = 1, mrf_smp_sweep;
  logic mrf_busy, mrf_done, mrf_smp_valid, mrf_smp_phase;
  logic [6:0] mrf_smp_row, mrf_smp_col0;
  logic [P-1:0][3:0] mrf_smp_labels;
  logic abc_run = 0, abc_parallel = 1, abc_random_scan = 0, abc_sweep_done;
  logic [2:0] abc_clamp = 0, abc_value = 0, abc_state;
  logic bin_sample = 0;
  logic [7:0] bin_theta = 8'd128;
  logic [3:0] bin_count;
  logic spk_start = 0, spk_valid;
  energy_t [SK-1:0] spk_energy;
  logic [SK-1:0] spk_spikes;
  logic [3:0] spk_value;
  logic [15:0] spk_ticks;
  logic dp_clear = 0, dp_pt_we = 0, dp_start = 0, dp_busy, dp_done, dp_asg_valid;
  logic [255:0] dp_pt_data = '0;
  logic [15:0] dp_sweeps = 8;
  logic [10:0] dp_num_points, dp_rd_n;
  logic [5:0] dp_num_clusters;
  logic [9:0] dp_asg_index;
  logic [4:0] dp_asg_cluster, dp_rd_cluster = 0;
  logic [255:0][10:0] dp_rd_counts;
  int checks = 0, failures = 0;
  logic [3:0] truth [NPIX];
  logic [3:0] noisy [NPIX];

  bayes_machine_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // learning workload alongside
  initial begin : learning
    logic [255:0] proto [3];
    int tot;
    for (int p = 0; p < 3; p++)
      for (int d = 0; d < 256; d++) begin
        int r, cc;
        r = d / 16; cc = d % 16;
        proto[p][d] = (p == 0) ? (cc < 8)      // left half dark
                    : (p == 1) ? (cc >= 8)     // right half dark
                    : (r < 8);                 // top half dark
      end
    wait (rst_n);
    @(negedge clk);
    for (int i = 0; i < 24; i++) begin
      logic [255:0] v;
      v = proto[i % 3];
      for (int f = 0; f < 6; f++) v[(i * 37 + f * 53) % 256] ^= 1'b1;
      @(negedge clk); dp_pt_we = 1; dp_pt_data = v;
    end
    @(negedge clk); dp_pt_we = 0;
    dp_start = 1; @(negedge clk); dp_start = 0;
    while (!dp_done) @(negedge clk);
    @(negedge clk);
    check(dp_num_clusters == 3, $sformatf("learner found %0d clusters", dp_num_clusters));
    tot = 0;
    for (int k = 0; k < 32; k++) begin dp_rd_cluster = 5'(k); #1; tot += int'(dp_rd_n); end
    check(tot == 24, "learner cluster sizes sum to 24");
  end

  initial begin
    int raw_err, fin_err, cyc, beats;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // build the depth problem
    raw_err = 0;
    for (int p = 0; p < NPIX; p++) begin
      int r, cc;
      r = p / W; cc = p % W;
      truth[p] = (r >= 30 && r < 66 && cc >= 40 && cc < 90) ? 4'd11 : 4'(2 + cc / 32);
      noisy[p] = truth[p];
      if ($urandom_range(99) < 15) noisy[p] = 4'((int'(truth[p]) + 1 + $urandom_range(14)) % 16);
      if (noisy[p] != truth[p]) raw_err++;
    end
    for (int p = 0; p < NPIX; p++) begin
      @(negedge clk);
      mrf_cfg_y_we = 1; mrf_cfg_y_addr = 14'(p);
      for (int l = 0; l < L; l++) mrf_cfg_y_data[l] = to_energy(l == int'(noisy[p]) ? 0 : -24);
      mrf_cfg_x_we = 1; mrf_cfg_x_addr = 14'(p); mrf_cfg_x_data = noisy[p];
    end
    @(negedge clk); mrf_cfg_y_we = 0; mrf_cfg_x_we = 0;
    for (int i = 0; i < L; i++)
      for (int j = 0; j < L; j++) begin
        int dd;
        dd = (i > j) ? i - j : j - i;
        @(negedge clk); mrf_cfg_pair_we = 1; mrf_cfg_pair_own = 4'(i); mrf_cfg_pair_nb = 4'(j);
        mrf_cfg_pair_data = to_energy(-16 * (dd > 2 ? 2 : dd));
      end
    @(negedge clk); mrf_cfg_pair_we = 0;
    mrf_sweeps = SWEEPS; mrf_start = 1; @(negedge clk); mrf_start = 0;
    cyc = 0; beats = 0;
    do begin
      @(negedge clk); cyc++;
      if (mrf_smp_valid) beats++;
    end while (!mrf_done && cyc < 100000);
    check(cyc == SWEEPS * 1536, $sformatf("MRF run took %0d cycles", cyc));
    check(beats == SWEEPS * 1536, $sformatf("stream had %0d beats", beats));
    fin_err = 0;
    for (int p = 0; p < NPIX; p++) begin
      mrf_rd_addr = 14'(p); #1;
      if (mrf_rd_label != truth[p]) fin_err++;
    end
    $display("depth: raw errors %0d, after %0d sweeps %0d of %0d pixels", raw_err, SWEEPS, fin_err, NPIX);
    check(fin_err * 2 < raw_err, "MRF inference at least halves the error rate");
    // small operations of the other engines
    abc_run = 1; repeat (100) @(negedge clk); abc_run = 0;
    bin_sample = 1; repeat (10) begin @(negedge clk); check(bin_count <= 8, "binomial range"); end
    bin_sample = 0;
    for (int i = 0; i < SK; i++) spk_energy[i] = to_energy(i == 5 ? 200 : -100);
    spk_start = 1; @(negedge clk); spk_start = 0;
    while (!spk_valid) @(negedge clk);
    check(spk_value == 5, "spiking sampler picks the dominant value");
    wait (!dp_busy && dp_num_points == 24);
    repeat (2) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
