// bnn_pkg: types and constants shared by the multi-exit dropout BayesNN datapath.
//
// Activations are signed fixed-point words of DATA_W bits (16 bits, the widest
// of the bitwidths the co-exploration picks from, {4, 6, 8, 16}). Their binary
// point does not matter to any block here: dropout only zeroes or scales by a
// rate, and the ensemble only adds and divides. Rates and uniform random numbers
// are unsigned Q0.16 fractions (value = code / 65536). The dropout type is a
// build-time choice, as the generated accelerators hold one kind of dropout layer.
package bnn_pkg;

  localparam int unsigned DATA_W = 16;  // activation width
  localparam int unsigned RATE_W = 16;  // keep_rate and uniform random width (Q0.16)

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic        [RATE_W-1:0] rate_t;

  // Kind of dropout layer at the head of every Bayesian exit branch.
  typedef enum logic {
    DROP_MCD  = 1'b0,   // Monte-Carlo dropout, Bernoulli sampled at run time
    DROP_MASK = 1'b1    // Masksembles, pre-defined binary masks
  } dropout_e;

  // One step of Marsaglia's 32-bit xorshift generator (shifts 13, 17, 5).
  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  // Seed of the random generator in MC engine `k` of exit `e`. Every engine
  // gets its own stream so that parallel samples are independent; the seed is
  // never zero (zero is the one fixed point of xorshift).
  function automatic logic [31:0] engine_seed(input int unsigned e, input int unsigned k);
    logic [31:0] s;
    s = 32'h2545_F491 ^ (32'(e) * 32'h9E37_79B9) ^ (32'(k) * 32'h85EB_CA6B);
    return (s == 32'd0) ? 32'h1 : s;
  endfunction

endpackage
