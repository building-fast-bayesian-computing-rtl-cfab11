// tb_mrf_processor: an 8 x 4 lattice with 4 labels and 2 Gibbs units.
//  1. Hard data term (0 for a chosen label, -100 nats otherwise) and zero
//     pairwise table: one sweep must set every pixel to its chosen label. The
//     sample stream must cover every pixel exactly once per sweep, with the
//     right parity per phase, and `done` must come 2*H*W/(2P) cycles after
//     `start` with no gap in the stream.
//  2. All pixels but one stay hard; pixel (1,2) has a soft data term and a
//     truncated-linear pairwise table links it to its four fixed neighbours.
//     Its 4000 samples must follow exp(E(l)) / sum exp(E(k)), with
//     E(l) = Y(l) + sum_n PAIR[l][x_n] computed here from the loaded tables.
module tb_mrf_processor;
  import sdc_pkg::*;
  localparam int W = 8, H = 4, L = 4, P = 2, G = W / (2 * P);
  localparam int AW = $clog2(W * H);
  logic clk = 0, rst_n = 0;
  logic cfg_y_we = 0, cfg_pair_we = 0, cfg_x_we = 0, start = 0;
  logic [AW-1:0] cfg_y_addr = 0, cfg_x_addr = 0, rd_addr = 0;
  energy_t [L-1:0] cfg_y_data;
  logic [1:0] cfg_pair_own = 0, cfg_pair_nb = 0, cfg_x_data = 0, rd_label;
  energy_t cfg_pair_data;
  logic [15:0] sweeps = 1, smp_sweep;
  logic busy, done, smp_valid, smp_phase;
  logic [1:0] smp_row;
  logic [2:0] smp_col0;
  logic [P-1:0][1:0] smp_labels;
  int checks = 0, failures = 0;
  int y_tab [W*H][L];
  int pair_tab [L][L];

  mrf_processor #(.W(W), .H(H), .L(L), .P(P)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int target(int r, int cc);
    return (r * 3 + cc) % L;
  endfunction

  task automatic load_tables();
    for (int p = 0; p < W * H; p++) begin
      @(negedge clk);
      cfg_y_we = 1; cfg_y_addr = AW'(p);
      for (int l = 0; l < L; l++) cfg_y_data[l] = to_energy(y_tab[p][l]);
    end
    @(negedge clk); cfg_y_we = 0;
    for (int i = 0; i < L; i++)
      for (int j = 0; j < L; j++) begin
        @(negedge clk);
        cfg_pair_we = 1; cfg_pair_own = 2'(i); cfg_pair_nb = 2'(j); cfg_pair_data = to_energy(pair_tab[i][j]);
      end
    @(negedge clk); cfg_pair_we = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int seen [W*H];
    int cyc, nvalid;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // ---- test 1: hard data term
    for (int r = 0; r < H; r++)
      for (int cc = 0; cc < W; cc++)
        for (int l = 0; l < L; l++) y_tab[r*W+cc][l] = (l == target(r, cc)) ? 0 : -1600;
    for (int i = 0; i < L; i++) for (int j = 0; j < L; j++) pair_tab[i][j] = 0;
    load_tables();
    for (int p = 0; p < W * H; p++) begin
      @(negedge clk); cfg_x_we = 1; cfg_x_addr = AW'(p); cfg_x_data = 0;
    end
    @(negedge clk); cfg_x_we = 0;
    foreach (seen[p]) seen[p] = 0;
    sweeps = 1; start = 1; @(negedge clk); start = 0;
    cyc = 0; nvalid = 0;
    do begin
      @(negedge clk);
      cyc++;
      if (smp_valid) begin
        nvalid++;
        for (int j = 0; j < P; j++) begin
          int cc;
          cc = int'(smp_col0) + 2 * j;
          seen[int'(smp_row) * W + cc]++;
          check(((int'(smp_row) + cc) % 2) == int'(smp_phase), "stream parity");
          check(int'(smp_labels[j]) == target(int'(smp_row), cc), "stream label");
        end
      end
    end while (!done && cyc < 1000);
    check(cyc == 2 * H * G, $sformatf("done after %0d cycles, expected %0d", cyc, 2 * H * G));
    check(nvalid == 2 * H * G, $sformatf("stream had %0d beats", nvalid));
    foreach (seen[p]) check(seen[p] == 1, $sformatf("pixel %0d seen %0d times", p, seen[p]));
    for (int p = 0; p < W * H; p++) begin
      rd_addr = AW'(p); #1;
      check(int'(rd_label) == target(p / W, p % W), $sformatf("state of pixel %0d", p));
    end
    // ---- test 2: one soft pixel with four fixed neighbours
    begin
      int yv [L] = '{0, -8, 4, -16};
      int hist [L] = '{0, 0, 0, 0};
      real z, pr [L];
      int nsw = 4000;
      for (int l = 0; l < L; l++) y_tab[1*W+2][l] = yv[l];
      for (int i = 0; i < L; i++)
        for (int j = 0; j < L; j++) pair_tab[i][j] = -8 * (((i > j) ? i - j : j - i) > 2 ? 2 : ((i > j) ? i - j : j - i));
      load_tables();
      z = 0;
      for (int l = 0; l < L; l++) begin
        int e;
        e = yv[l] + pair_tab[l][target(0, 2)] + pair_tab[l][target(2, 2)]
                  + pair_tab[l][target(1, 1)] + pair_tab[l][target(1, 3)];
        pr[l] = $exp(e / 16.0); z += pr[l];
      end
      sweeps = 16'(nsw); start = 1; @(negedge clk); start = 0;
      while (!done) begin
        if (smp_valid && smp_row == 1 && smp_phase == 1)
          for (int j = 0; j < P; j++) if (int'(smp_col0) + 2 * j == 2) hist[smp_labels[j]]++;
        @(negedge clk);
      end
      for (int l = 0; l < L; l++) begin
        real ex, sd;
        ex = nsw * pr[l] / z; sd = $sqrt(ex * (1 - pr[l] / z));
        $display("label %0d: %0d vs %f", l, hist[l], ex);
        check((hist[l] - ex) <= 5 * sd + 1 && (ex - hist[l]) <= 5 * sd + 1, $sformatf("conditional bin %0d", l));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
