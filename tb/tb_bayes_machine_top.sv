// tb_bayes_machine_top: end-to-end run of the whole chip at a small MRF size
// (8 x 4 lattice, 4 labels, 2 units) and a 4-element spiking sampler.
// Every engine is exercised and every mechanism is counted:
//   MRF    - table loading, both checkerboard phases, multi-sweep runs, the
//            sample stream, `done`; a hard data term must be recovered.
//   ABC    - parallel, serial and random-scan sweeps, schedule switches while running,
//            and clamping (C held at 1 while A and B keep moving).
//   BINOM  - samples stay in 0..8 and their mean follows 8 * theta / 256.
//   SPIKE  - races end with a lone spike; ticks where several elements spike
//            together (inhibited ticks) must occur with equal energies.
//   DPMM   - 24 streamed 32-pixel images of two prototypes; new clusters must
//            be opened and the run must end with two clusters that hold all
//            points.
// A mechanism that never happens counts as a failure.
module tb_bayes_machine_top;
  import sdc_pkg::*;
  localparam int W = 8, H = 4, L = 4, P = 2, SK = 4;
  localparam int AW = $clog2(W * H);
  logic clk = 0, rst_n = 0;
  logic mrf_cfg_y_we = 0, mrf_cfg_pair_we = 0, mrf_cfg_x_we = 0, mrf_start = 0;
  logic [AW-1:0] mrf_cfg_y_addr = 0, mrf_cfg_x_addr = 0, mrf_rd_addr = 0;
  energy_t [L-1:0] mrf_cfg_y_data;
  logic [1:0] mrf_cfg_pair_own = 0, mrf_cfg_pair_nb = 0, mrf_cfg_x_data = 0, mrf_rd_label;
  energy_t mrf_cfg_pair_data = '0;
  logic [15:0] mrf_sweeps = 1, mrf_smp_sweep;
  logic mrf_busy, mrf_done, mrf_smp_valid, mrf_smp_phase;
  logic [1:0] mrf_smp_row;
  logic [2:0] mrf_smp_col0;
  logic [P-1:0][1:0] mrf_smp_labels;
  logic abc_run = 0, abc_parallel = 1, abc_random_scan = 0, abc_sweep_done;
  logic [2:0] abc_clamp = 0, abc_value = 0, abc_state;
  logic bin_sample = 0;
  logic [7:0] bin_theta = 0;
  logic [3:0] bin_count;
  logic spk_start = 0, spk_valid;
  energy_t [SK-1:0] spk_energy;
  logic [SK-1:0] spk_spikes;
  logic [1:0] spk_value;
  logic [15:0] spk_ticks;
  logic dp_clear = 0, dp_pt_we = 0, dp_start = 0, dp_busy, dp_done, dp_asg_valid;
  logic [31:0] dp_pt_data = '0;
  logic [15:0] dp_sweeps = 10;
  logic [6:0] dp_num_points, dp_rd_n;
  logic [3:0] dp_num_clusters;
  logic [5:0] dp_asg_index;
  logic [2:0] dp_asg_cluster, dp_rd_cluster = 0;
  logic [31:0][6:0] dp_rd_counts;
  int checks = 0, failures = 0;
  int n_new_cluster = 0, n_dp_asg = 0;
  logic [3:0] dp_prev_clusters = 0;

  // mechanism counters
  int n_phase0 = 0, n_phase1 = 0, n_mrf_done = 0, n_par = 0, n_ser = 0, n_rnd = 0, n_switch = 0;
  int n_clamped = 0, n_bin = 0, n_race = 0, n_inhibit = 0;

  bayes_machine_top #(.MRF_W(W), .MRF_H(H), .MRF_L(L), .MRF_P(P), .SPK_K(SK),
                      .DP_D(32), .DP_KMAX(8), .DP_NMAX(64)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (mrf_smp_valid) begin if (mrf_smp_phase) n_phase1++; else n_phase0++; end
    if (mrf_done) n_mrf_done++;
    if (abc_sweep_done) begin
      if (abc_clamp[2]) n_clamped++;
      else if (abc_random_scan) n_rnd++;
      else if (abc_parallel) n_par++;
      else n_ser++;
    end
    if (spk_valid) n_race++;
    if ($countones(spk_spikes) > 1) n_inhibit++;
    if (dp_asg_valid) n_dp_asg++;
    if (dp_num_clusters > dp_prev_clusters) n_new_cluster++;
    dp_prev_clusters = dp_num_clusters;
  end

  function automatic int target(int r, int cc);
    return (r + 2 * cc) % L;
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ABC network and Binomial sampler run alongside the MRF
  initial begin : side_engines
    real s;
    int a_moves;
    logic a_prev;
    wait (rst_n);
    @(negedge clk);
    abc_run = 1; abc_parallel = 1;
    repeat (200) @(negedge clk);
    abc_parallel = 0; n_switch++;               // switch schedule while running
    repeat (300) @(negedge clk);
    abc_random_scan = 1; n_switch++;
    repeat (200) @(negedge clk);
    abc_random_scan = 0;
    abc_parallel = 1; n_switch++;
    abc_clamp = 3'b100; abc_value = 3'b100;     // clamp C = 1
    a_moves = 0; a_prev = abc_state[0];
    repeat (400) begin
      @(negedge clk);
      check(abc_state[2] == 1'b1, "clamped C holds");
      if (abc_state[0] != a_prev) a_moves++;
      a_prev = abc_state[0];
    end
    check(a_moves > 0, "A keeps sampling while C is clamped");
    abc_run = 0;
    // Binomial
    bin_theta = 8'd64; bin_sample = 1; s = 0;
    repeat (4000) begin
      @(negedge clk); n_bin++; s += bin_count;
      if (bin_count > 8) check(0, "binomial count out of range");
    end
    bin_sample = 0;
    check(s / 4000 > 1.9 && s / 4000 < 2.1, $sformatf("binomial mean %f", s / 4000));
  end

  // DPMM learner runs alongside as well
  initial begin : dpmm_engine
    int tot;
    wait (rst_n);
    @(negedge clk);
    for (int i = 0; i < 24; i++) begin
      @(negedge clk); dp_pt_we = 1; dp_pt_data = (i % 2) ? 32'hFFFF_0000 : 32'h0000_FFFF;
    end
    @(negedge clk); dp_pt_we = 0;
    dp_start = 1; @(negedge clk); dp_start = 0;
    while (!dp_done) @(negedge clk);
    @(negedge clk);
    check(n_dp_asg == 240, $sformatf("DPMM made %0d assignments", n_dp_asg));
    check(dp_num_clusters == 2, $sformatf("DPMM ended with %0d clusters", dp_num_clusters));
    tot = 0;
    for (int k = 0; k < 8; k++) begin dp_rd_cluster = 3'(k); #1; tot += int'(dp_rd_n); end
    check(tot == 24 && dp_num_points == 24, "DPMM cluster sizes");
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // ---- MRF: load a hard data term and zero pairwise table, run 3 sweeps
    for (int p = 0; p < W * H; p++) begin
      @(negedge clk);
      mrf_cfg_y_we = 1; mrf_cfg_y_addr = AW'(p);
      for (int l = 0; l < L; l++) mrf_cfg_y_data[l] = to_energy(l == target(p / W, p % W) ? 0 : -1600);
    end
    @(negedge clk); mrf_cfg_y_we = 0;
    for (int i = 0; i < L * L; i++) begin
      @(negedge clk); mrf_cfg_pair_we = 1; mrf_cfg_pair_own = 2'(i / L); mrf_cfg_pair_nb = 2'(i % L);
      mrf_cfg_pair_data = to_energy(0);
    end
    @(negedge clk); mrf_cfg_pair_we = 0;
    for (int p = 0; p < W * H; p++) begin
      @(negedge clk); mrf_cfg_x_we = 1; mrf_cfg_x_addr = AW'(p); mrf_cfg_x_data = 2'((p * 7) % L);
    end
    @(negedge clk); mrf_cfg_x_we = 0;
    mrf_sweeps = 3; mrf_start = 1; @(negedge clk); mrf_start = 0;
    begin
      int cyc;
      cyc = 0;
      do begin
        @(negedge clk); cyc++;
        if (mrf_smp_valid)
          for (int j = 0; j < P; j++)
            check(int'(mrf_smp_labels[j]) == target(int'(mrf_smp_row), int'(mrf_smp_col0) + 2 * j), "MRF stream label");
      end while (!mrf_done && cyc < 10000);
      check(cyc == 3 * 2 * H * (W / (2 * P)), $sformatf("MRF run took %0d cycles", cyc));
    end
    for (int p = 0; p < W * H; p++) begin
      mrf_rd_addr = AW'(p); #1;
      check(int'(mrf_rd_label) == target(p / W, p % W), "MRF final label");
    end
    // ---- spiking sampler: equal energies force collisions
    for (int i = 0; i < SK; i++) spk_energy[i] = to_energy(0);
    repeat (300) begin
      spk_start = 1; @(negedge clk); spk_start = 0;
      while (!spk_valid) @(negedge clk);
      check(spk_ticks > 0, "race length");
    end
    wait (n_bin >= 4000 && n_dp_asg >= 240);
    @(negedge clk);
    $display("new_cluster=%0d dp_asg=%0d", n_new_cluster, n_dp_asg);
    $display("phase0=%0d phase1=%0d mrf_done=%0d par=%0d ser=%0d rnd=%0d switch=%0d clamped=%0d bin=%0d race=%0d inhibit=%0d",
             n_phase0, n_phase1, n_mrf_done, n_par, n_ser, n_rnd, n_switch, n_clamped, n_bin, n_race, n_inhibit);
    check(n_phase0 > 0, "MRF phase 0 happened");
    check(n_phase1 > 0, "MRF phase 1 happened");
    check(n_mrf_done == 1, "MRF done once");
    check(n_par > 0, "parallel ABC sweeps happened");
    check(n_ser > 0, "serial ABC sweeps happened");
    check(n_rnd > 0, "random-scan ABC sweeps happened");
    check(n_switch > 0, "schedule switch happened");
    check(n_clamped > 0, "clamped ABC sweeps happened");
    check(n_bin > 0, "binomial samples happened");
    check(n_race == 300, "spiking races happened");
    check(n_inhibit > 0, "lateral inhibition of simultaneous spikes happened");
    check(n_new_cluster > 0, "DPMM opened new clusters");
    check(n_dp_asg > 0, "DPMM assignments happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
