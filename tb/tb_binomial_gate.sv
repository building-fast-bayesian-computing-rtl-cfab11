// tb_binomial_gate: draws 20000 samples of the default 8-trial gate for several
// coin weights and compares the sample mean and variance with n*p and n*p*(1-p).
// A zero weight must always give 0.
module tb_binomial_gate;
  localparam int NT = 8, M = 8;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [M-1:0] theta;
  logic [$clog2(NT+1)-1:0] count;
  int checks = 0, failures = 0;

  binomial_gate dut (.clk, .rst_n, .sample, .theta, .count);

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

  initial begin
    int weights [4] = '{0, 32, 128, 224};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    foreach (weights[w]) begin
      real p, mean, var_, s, s2;
      int n;
      theta = M'(weights[w]); sample = 1;
      s = 0; s2 = 0; n = 20000;
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        s += real'(count); s2 += real'(count) * real'(count);
        if (weights[w] == 0 && count != 0) check(0, "zero weight gave a success");
      end
      p = real'(weights[w]) / 256.0;
      mean = s / n; var_ = s2 / n - mean * mean;
      $display("theta=%0d mean=%f (exp %f) var=%f (exp %f)", weights[w], mean, NT*p, var_, NT*p*(1-p));
      check((mean - NT*p) < 0.05 && (NT*p - mean) < 0.05, "mean");
      check((var_ - NT*p*(1-p)) < 0.1 && (NT*p*(1-p) - var_) < 0.1, "variance");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
