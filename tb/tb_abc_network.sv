// tb_abc_network: runs the three-variable network under all three schedules
// (parallel, serial, random scan) and with C clamped to 1, and compares the sampled marginals of A, B and C after
// each sweep with exact values worked out here by enumerating the joint built
// from the same log-probability tables. It also checks the sweep lengths
// (2 cycles parallel, 3 serial) and that clamped C never moves.
module tb_abc_network;
  logic clk = 0, rst_n = 0, run = 0, parallel = 1, random_scan = 0;
  logic clamp_a = 0, value_a = 0, clamp_b = 0, value_b = 0, clamp_c = 0, value_c = 0;
  logic a, b, c, sweep_done;
  int checks = 0, failures = 0;
  int sweeps_parallel = 0, sweeps_serial = 0, sweeps_clamped = 0, sweeps_random = 0;

  localparam int LP_A  [2]    = '{-6, -19};
  localparam int LP_BA [2][2] = '{'{-4, -26}, '{-37, -2}};
  localparam int LP_CA [2][2] = '{'{-2, -37}, '{-19, -6}};

  abc_network dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // exact marginals P(A=1), P(B=1), P(C=1), optionally given C = 1
  task automatic exact(input bit given_c, output real pa, output real pb, output real pc);
    real z;
    z = 0; pa = 0; pb = 0; pc = 0;
    for (int ia = 0; ia < 2; ia++)
      for (int ib = 0; ib < 2; ib++)
        for (int ic = 0; ic < 2; ic++) begin
          real w;
          if (given_c && ic == 0) continue;
          w = $exp((LP_A[ia] + LP_BA[ia][ib] + LP_CA[ia][ic]) / 16.0);
          z += w; pa += ia * w; pb += ib * w; pc += ic * w;
        end
    pa /= z; pb /= z; pc /= z;
  endtask

  task automatic measure(string name, int n, bit given_c, int cyc_per_sweep);
    real ea, eb, ec, sa, sb, sc;
    int cyc, last_done;
    exact(given_c, ea, eb, ec);
    sa = 0; sb = 0; sc = 0; cyc = 0; last_done = -1;
    run = 1;
    for (int s = 0; s < n;) begin
      @(negedge clk); cyc++;
      if (sweep_done) begin
        if (last_done >= 0) check(cyc - last_done == cyc_per_sweep, $sformatf("%s sweep length %0d", name, cyc - last_done));
        last_done = cyc;
        // the sweep's last update lands on this edge; sample the state now
        sa += a; sb += b; sc += c; s++;
        if (given_c) check(c == 1, "clamped C moved");
        if (name == "parallel") sweeps_parallel++;
        else if (name == "random") sweeps_random++;
        else if (name == "serial") sweeps_serial++;
        else sweeps_clamped++;
      end
    end
    run = 0;
    sa /= n; sb /= n; sc /= n;
    $display("%s: A %f/%f B %f/%f C %f/%f", name, sa, ea, sb, eb, sc, ec);
    check(sa - ea < 0.02 && ea - sa < 0.02, {name, " P(A=1)"});
    check(sb - eb < 0.02 && eb - sb < 0.02, {name, " P(B=1)"});
    check(sc - ec < 0.02 && ec - sc < 0.02, {name, " P(C=1)"});
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    parallel = 1; measure("parallel", 40000, 0, 2);
    parallel = 0; repeat (3) @(negedge clk); measure("serial", 40000, 0, 3);
    random_scan = 1; repeat (3) @(negedge clk); measure("random", 40000, 0, 2);
    random_scan = 0;
    parallel = 1; clamp_c = 1; value_c = 1; repeat (3) @(negedge clk);
    measure("clamped", 40000, 1, 2);
    check(sweeps_parallel > 0 && sweeps_serial > 0 && sweeps_clamped > 0 && sweeps_random > 0, "every mode ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
