// tb_discrete_sample: drives the default 16-outcome, 8.4-bit gate with several
// energy vectors and compares the histogram of 20000 draws per vector with
// exp(e_i) / sum exp(e_k), worked out here in floating point from the same
// sign-magnitude codes. Each bin must lie within 5 standard deviations (plus
// one count). One vector uses the printed codes 11.125 and -7.5; its winner
// must come out every time. The gate must also hold its draw while SAMPLE is low.
module tb_discrete_sample;
  import sdc_pkg::*;
  localparam int K = 16;
  logic clk = 0, rst_n = 0, sample = 0;
  energy_t [K-1:0] energy;
  logic [3:0] out;
  int checks = 0, failures = 0;

  discrete_sample dut (.clk, .rst_n, .sample, .energy, .out);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real value_of(energy_t e);
    real m;
    m = real'(e[EW-2:0]) / 16.0;
    return e[EW-1] ? -m : m;
  endfunction

  task automatic run_case(string name, int n);
    int hist [K];
    real z, p [K];
    z = 0;
    for (int i = 0; i < K; i++) begin p[i] = $exp(value_of(energy[i])); z += p[i]; hist[i] = 0; end
    sample = 1;
    for (int s = 0; s < n; s++) begin @(negedge clk); hist[out]++; end
    sample = 0;
    for (int i = 0; i < K; i++) begin
      real ex, sd;
      ex = n * p[i] / z; sd = $sqrt(ex * (1.0 - p[i] / z));
      check((real'(hist[i]) - ex) <= 5.0 * sd + 1.0 && (ex - real'(hist[i])) <= 5.0 * sd + 1.0,
            $sformatf("%s bin %0d: %0d vs %f", name, i, hist[i], ex));
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // printed codes: 01011.001 = 11.125 (index 3), 10111.100 = -7.5 elsewhere
    for (int i = 0; i < K; i++) energy[i] = to_energy(-120);
    energy[3] = to_energy(178);
    check(energy[3] == 12'b0000_1011_0010 && energy[0] == 12'b1000_0111_1000, "printed codes");
    run_case("peaked", 2000);
    // uniform
    for (int i = 0; i < K; i++) energy[i] = to_energy(0);
    run_case("uniform", 20000);
    // graded: e_i = -0.25 i, with one large positive and some negative codes
    for (int i = 0; i < K; i++) energy[i] = to_energy(-4 * i + 40);
    run_case("graded", 20000);
    // two equal maxima among widely spread energies
    for (int i = 0; i < K; i++) energy[i] = to_energy((i % 5) * -19);
    energy[7] = to_energy(-300);
    run_case("mixed", 20000);
    // holds while sample is low
    begin
      logic [3:0] held;
      @(negedge clk); held = out;
      repeat (20) begin @(negedge clk); check(out == held, "holds without SAMPLE"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
