// tb_discrete_sample_k1000: the accuracy workload for the discrete-sample gate.
// It draws from distributions over 1000 outcomes, from nearly uniform
// (almost 10 bits of entropy) to nearly deterministic. The gate is built
// with K = 1024, and the 24 spare inputs are held at the lowest energy.
//
// For each of three energy profiles (high, medium and low entropy), real
// energies are rounded to the 8.4 sign-magnitude code and 100000 draws are
// taken. A chi-square test compares the histogram with the law the gate is
// specified to draw from: weights round(2^16 exp(e_i - e_max)) of the coded
// energies, normalised (see discrete_sample). Bins expected to hold fewer than 5
// draws are pooled. The statistic per degree of freedom must stay below
// 1 + 6 sqrt(2 / dof). The testbench also prints, for reference:
//   * the precision loss of the 8.4 energy code plus 16-bit weights: the real
//     probability mass of outcomes whose weight rounds to zero, and the KL
//     divergence from the unrounded real law to the gate's law on the rest;
//   * the entropy of each profile.
module tb_discrete_sample_k1000;
  import sdc_pkg::*;
  localparam int K = 1024, NOUT = 1000, NDRAW = 100000;
  logic clk = 0, rst_n = 0, sample = 0;
  energy_t [K-1:0] energy;
  logic [9:0] out;
  int checks = 0, failures = 0;

  discrete_sample #(.K(K)) dut (.clk, .rst_n, .sample, .energy, .out);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // uniform integer in [-500, 500]
  function automatic int jitter();
    int r;
    r = $urandom_range(1000);
    return r - 500;
  endfunction

  task automatic run_profile(string name, real ereal [NOUT]);
    int  hist [K];
    real pq [NOUT], pr [NOUT];
    real zq, zr, kl, ent, chi2, pool_obs, pool_exp, lost;
    int  dof, cmax;
    zq = 0; zr = 0; cmax = -EMAXMAG;
    for (int i = 0; i < K; i++) begin
      hist[i] = 0;
      if (i < NOUT) begin
        int code;
        code = $rtoi(ereal[i] * 16.0 + (ereal[i] >= 0 ? 0.5 : -0.5));
        energy[i] = to_energy(code);
        pr[i] = $exp(ereal[i]); zr += pr[i];
        if (from_energy(energy[i]) > cmax) cmax = from_energy(energy[i]);
      end else begin
        energy[i] = to_energy(-EMAXMAG);
      end
    end
    // the gate's weights: round(2^16 exp(e_i - e_max)), zero below 1/2 LSB
    for (int i = 0; i < NOUT; i++) begin
      pq[i] = $floor(65536.0 * $exp(real'(from_energy(energy[i]) - cmax) / 16.0) + 0.5);
      zq += pq[i];
    end
    kl = 0; ent = 0; lost = 0;
    for (int i = 0; i < NOUT; i++) begin
      pq[i] /= zq; pr[i] /= zr;
      if (pq[i] > 0) kl += pr[i] * $ln(pr[i] / pq[i]);
      else lost += pr[i];
      if (pr[i] > 0) ent -= pr[i] * $ln(pr[i]) / $ln(2.0);
    end
    sample = 1;
    for (int s = 0; s < NDRAW; s++) begin @(negedge clk); hist[out]++; end
    sample = 0;
    for (int i = NOUT; i < K; i++) check(hist[i] == 0, $sformatf("%s: spare outcome %0d drawn", name, i));
    chi2 = 0; dof = -1; pool_obs = 0; pool_exp = 0;
    for (int i = 0; i < NOUT; i++) begin
      real ex;
      ex = NDRAW * pq[i];
      if (ex >= 5.0) begin
        chi2 += (hist[i] - ex) * (hist[i] - ex) / ex; dof++;
      end else begin
        pool_obs += hist[i]; pool_exp += ex;
      end
    end
    if (pool_exp >= 5.0) begin chi2 += (pool_obs - pool_exp) * (pool_obs - pool_exp) / pool_exp; dof++; end
    $display("%s: entropy %f bits, real mass on zero weights %e, KL(real || gate) over the rest %e nats, chi2/dof %f (dof %0d)",
             name, ent, lost, kl, chi2 / dof, dof);
    check(dof > 0 && chi2 / dof < 1.0 + 6.0 * $sqrt(2.0 / dof), {name, ": histogram matches the coded law"});
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real e [NOUT];
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // high entropy: small jitter around a uniform law
    for (int i = 0; i < NOUT; i++) e[i] = jitter() / 1000.0;
    run_profile("high", e);
    // medium entropy: a broad bump plus jitter
    for (int i = 0; i < NOUT; i++) e[i] = -((i - 500) * (i - 500)) / 20000.0 + jitter() / 500.0;
    run_profile("medium", e);
    // low entropy: two dominant outcomes, as in the low-entropy examples
    for (int i = 0; i < NOUT; i++) e[i] = -12.0 + jitter() / 250.0;
    e[200] = 0.0; e[230] = 0.3;
    run_profile("low", e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
