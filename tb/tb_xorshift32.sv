// tb_xorshift32: checks the generator against Marsaglia's published sequence
// for seed 2463534242 (723471715, 2497366906, 2064144800) and against a
// reference model for 1000 further steps, and checks that `advance` low holds
// the state.
module tb_xorshift32;
  logic clk = 0, rst_n = 0, advance = 0;
  logic [31:0] rnd, model;
  int checks = 0, failures = 0;

  xorshift32 #(.SEED(32'd2463534242)) dut (.clk, .rst_n, .advance, .rnd);

  always #5 clk = ~clk;

  function automatic logic [31:0] ref_step(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5; return x;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1; @(negedge clk);
    check(rnd == 32'd2463534242, "seed loaded");
    advance = 1;
    @(negedge clk); check(rnd == 32'd723471715, "first output");
    @(negedge clk); check(rnd == 32'd2497366906, "second output");
    @(negedge clk); check(rnd == 32'd2064144800, "third output");
    model = rnd;
    advance = 0;
    repeat (5) @(negedge clk);
    check(rnd == model, "holds when advance is low");
    advance = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk); model = ref_step(model);
      check(rnd == model && rnd != 0, "matches model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
