// xorshift_rng: uniform random number source of the MCD layer.
//
// The MCD layer needs one uniform random number per activation to decide
// whether that activation is dropped. This block keeps a 32-bit xorshift state
// (Marsaglia, shifts 13/17/5; period 2^32-1) and shows its upper RATE_W bits
// as `rnd`, a Q0.16 fraction in [0, 1). `rnd` is valid in the same cycle it is
// consumed; asserting `en` for one cycle moves to the next number on the next
// edge, so a stream that consumes one number per cycle gets a new one per
// cycle. Reset (active low, synchronous to clk) loads SEED.
//
// The need for a random generator is the paper's; the xorshift kind, its width
// and the seeding are this design's choice.
module xorshift_rng
  import bnn_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,     // advance to the next number
  output rate_t rnd     // current uniform number, Q0.16
);

  logic [31:0] state;

  always_ff @(posedge clk) begin
    if (!rst_n)  state <= (SEED == 32'd0) ? 32'h1 : SEED;
    else if (en) state <= xorshift32(state);
  end

  assign rnd = state[31 -: RATE_W];

endmodule
