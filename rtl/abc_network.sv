// abc_network: an assembly of three transition circuits for P(A) P(B|A) P(C|A).
//
// Three binary variables, each held by a transition_circuit. A is updated from
// its full conditional, e_A(a) = log P(a) + log P(b|a) + log P(c|a), with
// multiplexers selecting the table entries by the current B and C; B and C are
// updated from log P(b|a) and log P(c|a). Any variable can be clamped to an
// observed value, which turns the free-running sampler of the joint into a
// sampler of the conditional distribution over the others.
//
// Three schedules, all of which respect the rule that interacting circuits
// never transition together (B and C do not interact, A interacts with both):
//   parallel = 1 : phase 0 steps A, phase 1 steps B and C together (2 cycles/sweep)
//   parallel = 0 : A, then B, then C                               (3 cycles/sweep)
//   random_scan = 1 (overrides parallel): each cycle a fair coin from a
//       private xorshift32 picks either A or the pair {B, C}; a "sweep" is two
//       such updates. This is a mixture of the two parallel-schedule kernels,
//       a stochastic schedule; the other two are deterministic cycles.
// `sweep_done` pulses for one cycle right after the last update of a sweep,
// while a, b, c show that sweep's result. The mode inputs may change at any
// time; a partly done sweep is then finished under the new mode. The log-probability
// tables are parameters in units of 2^-EN nats; their default values
// (P(A=1) = 0.3, P(B=1|A) = 0.2 / 0.9, P(C=1|A) = 0.1 / 0.7) are examples
// chosen by this design, as the paper gives no numbers for this model.
module abc_network
  import sdc_pkg::*;
#(
  parameter int LP_A  [2]    = '{-6, -19},                   // log P(A=a)
  parameter int LP_BA [2][2] = '{'{-4, -26}, '{-37, -2}},    // log P(B=b | A=a), [a][b]
  parameter int LP_CA [2][2] = '{'{-2, -37}, '{-19, -6}}     // log P(C=c | A=a), [a][c]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,          // advance the schedule
  input  logic parallel,     // 1: two-phase parallel schedule, 0: serial schedule
  input  logic random_scan,  // 1: random choice of A or {B, C} each cycle
  input  logic clamp_a, value_a,
  input  logic clamp_b, value_b,
  input  logic clamp_c, value_c,
  output logic a, b, c,
  output logic sweep_done
);

  logic [1:0] phase;
  logic       step_a, step_b, step_c, last;
  logic [31:0] coin_bits;
  logic        coin;                      // fair bit: parity of the generator word
  energy_t [1:0] e_a, e_b, e_c;

  xorshift32 #(.SEED(32'h7A3C_0004)) u_coin (
    .clk, .rst_n, .advance(run && random_scan), .rnd(coin_bits)
  );

  assign coin = ^coin_bits;

  // Schedule
  always_comb begin
    if (random_scan) begin
      step_a = run && coin;
      step_b = run && !coin;
      step_c = step_b;
      last   = (phase != 2'd0);
    end else if (parallel) begin
      step_a = run && (phase == 2'd0);
      step_b = run && (phase != 2'd0);
      step_c = step_b;
      last   = (phase != 2'd0);
    end else begin
      step_a = run && (phase == 2'd0);
      step_b = run && (phase == 2'd1);
      step_c = run && (phase == 2'd2);
      last   = (phase == 2'd2);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase      <= '0;
      sweep_done <= 1'b0;
    end else begin
      sweep_done <= 1'b0;
      if (run) begin
        phase <= last ? 2'd0 : phase + 2'd1;
        if (last) sweep_done <= 1'b1;
      end
    end
  end

  // Energy multiplexers
  always_comb begin
    for (int v = 0; v < 2; v++) begin
      e_a[v] = to_energy(LP_A[v] + LP_BA[v][b] + LP_CA[v][c]);
      e_b[v] = to_energy(LP_BA[a][v]);
      e_c[v] = to_energy(LP_CA[a][v]);
    end
  end

  transition_circuit #(.K(2), .SEED(32'hA5A5_0001)) u_a (
    .clk, .rst_n, .step(step_a), .energy(e_a), .clamp(clamp_a), .clamp_value(value_a), .state(a)
  );
  transition_circuit #(.K(2), .SEED(32'h3C3C_0002)) u_b (
    .clk, .rst_n, .step(step_b), .energy(e_b), .clamp(clamp_b), .clamp_value(value_b), .state(b)
  );
  transition_circuit #(.K(2), .SEED(32'h6969_0003)) u_c (
    .clk, .rst_n, .step(step_c), .energy(e_c), .clamp(clamp_c), .clamp_value(value_c), .state(c)
  );

  // Dynamic discipline: A never transitions together with B or C.
  a_discipline: assert property (@(posedge clk) disable iff (!rst_n) !(step_a && (step_b || step_c)))
    else $error("abc_network: interacting circuits stepped together");

endmodule
