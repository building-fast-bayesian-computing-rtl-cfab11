// tb_dpmm_learner: clustering of 32-pixel binary images (KMAX = 8, NMAX = 64).
// Three prototypes, 16 points apart from one another, give 36 points; every
// fourth point has one pixel flipped. After 20 sweeps the learner must use
// exactly 3 clusters. Each prototype's points must share one cluster, and the
// three clusters must differ. Then 12 points of a fourth prototype stream in,
// and 20 more sweeps must grow the model to 4 clusters. After each run:
//   * the cluster sizes must sum to the number of points;
//   * each pixel's counts must sum to the number of points with that pixel set;
//   * a run of S sweeps over n points must take S * n * (KMAX + 2) cycles,
//     with one assignment per point visit.
module tb_dpmm_learner;
  localparam int D = 32, KMAX = 8, NMAX = 64;
  localparam int KW = $clog2(KMAX), NW = $clog2(NMAX + 1), IW = $clog2(NMAX);
  logic clk = 0, rst_n = 0, clear = 0, pt_we = 0, start = 0;
  logic [D-1:0] pt_data = '0;
  logic [15:0] sweeps = 1;
  logic busy, done, asg_valid;
  logic [NW-1:0] num_points, rd_n;
  logic [KW:0] num_clusters;
  logic [IW-1:0] asg_index;
  logic [KW-1:0] asg_cluster, rd_cluster = 0;
  logic [D-1:0][NW-1:0] rd_counts;
  int checks = 0, failures = 0;
  logic [D-1:0] data [NMAX];
  int proto_of [NMAX];
  int last_asg [NMAX];
  int npts = 0;

  localparam logic [D-1:0] PROTO [4] = '{32'h0000_FFFF, 32'hFFFF_0000, 32'hFF00_FF00, 32'hF0F0_F0F0};

  dpmm_learner #(.D(D), .KMAX(KMAX), .NMAX(NMAX), .LOG_ALPHA(512)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic add_points(int proto, int n);
    for (int i = 0; i < n; i++) begin
      logic [D-1:0] v;
      v = PROTO[proto];
      if (npts % 4 == 3) v[(npts * 7) % D] = ~v[(npts * 7) % D];
      data[npts] = v; proto_of[npts] = proto; npts++;
      @(negedge clk); pt_we = 1; pt_data = v;
    end
    @(negedge clk); pt_we = 0;
  endtask

  task automatic run(int s);
    int cyc, nasg;
    sweeps = 16'(s); start = 1; @(negedge clk); start = 0;
    cyc = 0; nasg = 0;
    do begin
      @(negedge clk); cyc++;
      if (asg_valid) begin nasg++; last_asg[asg_index] = int'(asg_cluster); end
    end while (!done && cyc < 1000000);
    check(cyc == s * npts * (KMAX + 2), $sformatf("run took %0d cycles, expected %0d", cyc, s * npts * (KMAX + 2)));
    check(nasg == s * npts, "one assignment per visit");
  endtask

  task automatic check_counts();
    int tot;
    int col [D];
    tot = 0;
    foreach (col[d]) col[d] = 0;
    for (int k = 0; k < KMAX; k++) begin
      rd_cluster = KW'(k); #1;
      tot += int'(rd_n);
      for (int d = 0; d < D; d++) col[d] += int'(rd_counts[d]);
    end
    check(tot == npts && int'(num_points) == npts, "cluster sizes sum to the point count");
    for (int d = 0; d < D; d++) begin
      int ones;
      ones = 0;
      for (int i = 0; i < npts; i++) ones += int'(data[i][d]);
      check(col[d] == ones, $sformatf("pixel %0d counts", d));
    end
  endtask

  task automatic check_clusters(int nproto);
    int rep [4];
    for (int p = 0; p < nproto; p++) rep[p] = -1;
    for (int i = 0; i < npts; i++) begin
      if (rep[proto_of[i]] < 0) rep[proto_of[i]] = last_asg[i];
      check(last_asg[i] == rep[proto_of[i]], $sformatf("point %0d apart from its prototype", i));
    end
    for (int p = 0; p < nproto; p++)
      for (int q = p + 1; q < nproto; q++) check(rep[p] != rep[q], "prototypes share a cluster");
    check(int'(num_clusters) == nproto, $sformatf("%0d clusters, expected %0d", num_clusters, nproto));
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    for (int i = 0; i < 12; i++) begin add_points(0, 1); add_points(1, 1); add_points(2, 1); end
    run(20);
    check_counts();
    check_clusters(3);
    add_points(3, 12);
    run(20);
    check_counts();
    check_clusters(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
