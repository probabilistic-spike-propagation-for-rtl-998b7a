// uniform_rng: 32-bit xorshift pseudo-random number generator.
//
// Supplies the uniform random numbers of the design: one value per input
// neuron and timestep for spike injection, and one threshold r per spike and
// polarity for probabilistic propagation. The paper only asks for uniformly
// distributed numbers; xorshift32 (x ^= x<<13; x ^= x>>17; x ^= x<<5) is this
// design's choice because it costs a few XORs and has period 2^32-1.
//
// Interface: value is the current state (never zero for a non-zero SEED).
// A cycle with next=1 moves to the following state at the clock edge.
// Reset (active low, synchronous) loads SEED.
module uniform_rng #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        next,
  output logic [31:0] value
);

  function automatic logic [31:0] step(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n)    value <= SEED;
    else if (next) value <= step(value);
  end

  initial assert (SEED != 32'd0) else $error("uniform_rng: SEED must be non-zero");

endmodule
