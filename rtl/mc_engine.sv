// mc_engine: one Monte-Carlo engine, the dropout stage of a Bayesian exit branch.
//
// An MC engine computes one MC sample at a time. Here it holds the dropout
// layer that starts the Bayesian part of an exit branch, of the kind fixed at
// build time by DROPOUT:
//   DROP_MCD  - an mcd_layer with its own random stream (SEED), driven by the
//               run-time keep_rate, drawing per element (MCD_CH = 0) or per
//               channel of MCD_CH channels (see mcd_layer);
//   DROP_MASK - a masksembles_layer holding the N_MASK masks of the samples this
//               engine computes; `round` selects the mask of the current sample.
// The engine tags its output with the round it belongs to, captured with the
// first element of every tensor, so that the layers downstream know which
// sample they are computing.
//
// The layers after the dropout layer (the exit's convolution / dense layers and
// classifier) are standard NN layers generated by an external HLS library; the
// engine's output stream leaves the design towards them.
//
// Timing: that of the dropout layer, one cycle latency, one element per cycle.
// Both builds share one port list, so a lint tool reports the ports the chosen
// kind does not use (the mask_wr_* port in an MCD build, keep_rate in a
// Masksembles build) as unused; that is expected.
//
// The split of the engine into this dropout stage and external layers is this
// design's reading of the paper's "MC Engine".
module mc_engine
  import bnn_pkg::*;
#(
  parameter dropout_e    DROPOUT   = DROP_MCD,
  parameter int unsigned FEAT_SIZE = 400,
  parameter int unsigned N_MASK    = 1,
  parameter logic [31:0] SEED      = 32'h2545_F491,
  parameter int unsigned MCD_CH    = 0,
  localparam int unsigned IDX_W  = (N_MASK    > 1) ? $clog2(N_MASK)    : 1,
  localparam int unsigned ADDR_W = (FEAT_SIZE > 1) ? $clog2(FEAT_SIZE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  rate_t             keep_rate,
  input  logic              mask_wr_en,
  input  logic [IDX_W-1:0]  mask_wr_idx,
  input  logic [ADDR_W-1:0] mask_wr_addr,
  input  logic              mask_wr_bit,
  input  logic [IDX_W-1:0]  round,
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t             in_data,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output data_t             out_data,
  output logic              out_last,
  output logic [IDX_W-1:0]  out_round
);

  logic first;  // next accepted element starts a tensor

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      first     <= 1'b1;
      out_round <= '0;
    end else if (in_valid && in_ready) begin
      first <= in_last;
      if (first) out_round <= round;
    end
  end

  if (DROPOUT == DROP_MCD) begin : g_mcd
    mcd_layer #(.SEED(SEED), .N_CH(MCD_CH)) u_drop (
      .clk, .rst_n, .keep_rate,
      .in_valid, .in_ready, .in_data, .in_last,
      .out_valid, .out_ready, .out_data, .out_last
    );
  end else begin : g_mask
    masksembles_layer #(.MASK_NUM(N_MASK), .MASK_SIZE(FEAT_SIZE)) u_drop (
      .clk, .rst_n,
      .mask_wr_en, .mask_wr_idx, .mask_wr_addr, .mask_wr_bit,
      .mask_index(round),
      .in_valid, .in_ready, .in_data, .in_last,
      .out_valid, .out_ready, .out_data, .out_last
    );
  end

endmodule
