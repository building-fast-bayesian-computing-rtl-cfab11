// tb_spiking_sampler: 4000 races of the default 16-element sampler on one
// energy vector. The winners' histogram must follow exp(e_i) / sum exp(e_k)
// within 5 standard deviations plus 4 % (the discrete-time bias bound). The
// winner must be the lone element spiking in the last tick of its race. The
// mean race length must match the geometric law of the first lone spike,
// 1 / sum_i q_i prod_{j != i} (1 - q_j) with q_i = 2^-5 exp(e_i - e_max),
// within 4 standard errors. A single large energy must always win.
module tb_spiking_sampler;
  import sdc_pkg::*;
  localparam int K = 16;
  logic clk = 0, rst_n = 0, start = 0;
  energy_t [K-1:0] energy;
  logic [K-1:0] spikes;
  logic valid;
  logic [3:0] value;
  logic [15:0] ticks;
  int checks = 0, failures = 0;

  spiking_sampler dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_case(string name, int vals [K], int n);
    int hist [K];
    real z, p [K], q [K], plone, tsum;
    int vmax;
    vmax = vals[0];
    for (int i = 0; i < K; i++) begin
      energy[i] = to_energy(vals[i]); hist[i] = 0;
      if (vals[i] > vmax) vmax = vals[i];
    end
    z = 0; plone = 0;
    for (int i = 0; i < K; i++) begin
      p[i] = $exp(vals[i] / 16.0); z += p[i];
      q[i] = $exp((vals[i] - vmax) / 16.0) / 32.0;
    end
    for (int i = 0; i < K; i++) begin
      real t;
      t = q[i];
      for (int j = 0; j < K; j++) if (j != i) t *= (1.0 - q[j]);
      plone += t;
    end
    tsum = 0;
    for (int s = 0; s < n; s++) begin
      logic [K-1:0] last_spikes;
      start = 1; @(negedge clk); start = 0;
      last_spikes = '0;
      while (!valid) begin last_spikes = spikes; @(negedge clk); end
      hist[value]++; tsum += ticks;
      check(last_spikes == (K'(1) << value), $sformatf("%s: winner %0d not the lone spike", name, value));
    end
    for (int i = 0; i < K; i++) begin
      real ex, sd;
      ex = n * p[i] / z; sd = $sqrt(ex * (1 - p[i] / z));
      check((hist[i] - ex) <= 5 * sd + 0.04 * ex + 1 && (ex - hist[i]) <= 5 * sd + 0.04 * ex + 1,
            $sformatf("%s bin %0d: %0d vs %f", name, i, hist[i], ex));
    end
    $display("%s: mean ticks %f, expected %f", name, tsum / n, 1.0 / plone);
    begin
      real mu, sdm;
      mu = 1.0 / plone; sdm = $sqrt((1.0 - plone) / (plone * plone) / n);
      check((tsum / n - mu) < 4 * sdm && (mu - tsum / n) < 4 * sdm, {name, " mean race length"});
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int graded [K], peaked [K];
    for (int i = 0; i < K; i++) begin graded[i] = 20 - 5 * i; peaked[i] = -100; end
    peaked[9] = 150;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    run_case("graded", graded, 4000);
    run_case("peaked", peaked, 300);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
