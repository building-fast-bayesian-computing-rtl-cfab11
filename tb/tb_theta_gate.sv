// tb_theta_gate: for every coin weight of a 6-bit gate, counts the random words
// that make it fire. A THETA gate must fire for exactly theta of the 2^M words,
// so its probability is theta / 2^M.
module tb_theta_gate;
  localparam int M = 6;
  logic [M-1:0] theta, rnd;
  logic out;
  int checks = 0, failures = 0;

  theta_gate #(.M(M)) dut (.theta, .rnd, .out);

  initial begin
    #100000; failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < (1 << M); t++) begin
      int ones;
      ones = 0;
      for (int r = 0; r < (1 << M); r++) begin
        theta = M'(t); rnd = M'(r); #1;
        ones += int'(out);
      end
      checks++;
      if (ones != t) begin failures++; $display("FAIL: theta=%0d fired %0d times", t, ones); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
