// tb_transition_circuit: a 4-valued transition circuit with fixed conditional
// energies is stepped 20000 times; the histogram of its states must match
// exp(e_i) / sum exp(e_k) within 5 standard deviations. It also checks that the
// state holds without `step`, that a clamp forces and holds the value, and
// that reset loads 0.
module tb_transition_circuit;
  import sdc_pkg::*;
  localparam int K = 4;
  logic clk = 0, rst_n = 0, step = 0, clamp = 0;
  logic [1:0] clamp_value = 0, state;
  energy_t [K-1:0] energy;
  int checks = 0, failures = 0;

  transition_circuit #(.K(K)) dut (.clk, .rst_n, .step, .energy, .clamp, .clamp_value, .state);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int vals [K] = '{0, -8, -16, 12};     // 0, -0.5, -1.0, +0.75 nats
    int hist [K] = '{0, 0, 0, 0};
    real z, p [K];
    z = 0;
    for (int i = 0; i < K; i++) begin energy[i] = to_energy(vals[i]); p[i] = $exp(vals[i] / 16.0); z += p[i]; end
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk); check(state == 0, "reset value");
    step = 1;
    for (int s = 0; s < 20000; s++) begin @(negedge clk); hist[state]++; end
    for (int i = 0; i < K; i++) begin
      real ex, sd;
      ex = 20000.0 * p[i] / z; sd = $sqrt(ex * (1 - p[i] / z));
      check((hist[i] - ex) <= 5 * sd + 1 && (ex - hist[i]) <= 5 * sd + 1,
            $sformatf("bin %0d: %0d vs %f", i, hist[i], ex));
    end
    step = 0;
    begin
      logic [1:0] held;
      held = state;
      repeat (10) begin @(negedge clk); check(state == held, "holds without step"); end
    end
    clamp = 1; clamp_value = 2; step = 1;
    repeat (50) begin @(negedge clk); check(state == 2, "clamped"); end
    clamp = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
