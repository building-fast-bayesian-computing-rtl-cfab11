// transition_circuit: a stochastic transition circuit for one discrete variable.
//
// A state register plus a Gibbs transition operator. The caller supplies the K
// energies of the variable's conditional distribution given its neighbours
// (normally chosen by multiplexers from the neighbours' values); a
// discrete_sample gate draws from it. This follows the paper's register +
// stochastic-transition-operator template and its clamping rule.
//
// Timing: when `step` is high at a clock edge, `state` takes the gate's draw
// and the gate's random source advances, so one transition costs one cycle.
// While `clamp` is high the register holds `clamp_value` instead (observed
// data); the clamp takes effect on the next edge whether or not `step` is high.
// Synchronous active-low reset loads INIT. The caller must respect the
// scheduling rule: no two interacting circuits step in the same cycle.
module transition_circuit
  import sdc_pkg::*;
#(
  parameter int unsigned K    = 2,
  parameter logic [31:0] SEED = 32'h5EED_0001,
  parameter int unsigned INIT = 0,
  localparam int unsigned SW  = (K > 1) ? $clog2(K) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            step,          // take one Gibbs transition this cycle
  input  energy_t [K-1:0] energy,        // conditional energies of the K values
  input  logic            clamp,         // hold the variable at clamp_value
  input  logic [SW-1:0]   clamp_value,
  output logic [SW-1:0]   state
);

  logic [SW-1:0] draw;

  discrete_sample #(.K(K), .M(EM), .N(EN), .SEED(SEED)) u_gate (
    .clk, .rst_n, .sample(step), .energy, .out(draw)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)     state <= SW'(INIT);
    else if (clamp) state <= clamp_value;
    else if (step)  state <= draw;
  end

endmodule
