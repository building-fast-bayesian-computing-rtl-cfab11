// xorshift32: the pseudorandom bit source that feeds every stochastic gate.
//
// Marsaglia's 32-bit xorshift generator with the shift triple (13, 17, 5):
//   x ^= x << 13;  x ^= x >> 17;  x ^= x << 5;
// Its period is 2^32 - 1 over the non-zero states. The paper names xorshift as
// the generator behind its gates; the word width, the shift triple and the
// seed are this design's choices.
//
// Interface: `rnd` is the current state. When `advance` is high at a rising
// clock edge the state steps once, so a fresh word is visible one cycle after
// the request. Reset (active low, synchronous) loads SEED; a zero seed would
// lock the generator and is replaced by 1.
module xorshift32 #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        advance,
  output logic [31:0] rnd
);

  localparam logic [31:0] SAFE_SEED = (SEED == 32'd0) ? 32'd1 : SEED;

  function automatic logic [31:0] next_state(logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n)       rnd <= SAFE_SEED;
    else if (advance) rnd <= next_state(rnd);
  end

endmodule
