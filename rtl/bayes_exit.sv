// bayes_exit: Bayesian component of one exit branch, with a mix of spatial and
// temporal mapping of its Monte-Carlo samples.
//
// The tensor produced by the last non-Bayesian layer feeding this exit is
// written into a feature_cache, then replayed in N_ROUND = ceil(N_PASS/N_ENGINE)
// rounds. In every round each element is handed to all N_ENGINE MC engines in
// the same cycle (spatial mapping: parallel engines); successive rounds reuse
// the engines for further samples (temporal mapping: clones concatenated in
// time). Engine k computes, in round r, MC sample s = r*N_ENGINE + k. If
// N_ENGINE does not divide N_PASS, the engines whose sample would be >= N_PASS
// sit out the last round. N_ENGINE = 1 is pure temporal mapping, N_ENGINE =
// N_PASS pure spatial mapping.
//
// Broadcast rule: an element leaves the cache only when every engine taking
// part in the round can accept it, so the engines move in lockstep and a stall
// on any engine's output stalls the whole exit.
//
// Masksembles masks are written by sample number through mask_wr_*: the write
// for sample s goes to engine s mod N_ENGINE, slot s div N_ENGINE, so the masks
// take N_PASS * FEAT_SIZE bits whatever the mapping.
//
// Timing (no stalls): FEAT_SIZE cycles to fill, N_ROUND*FEAT_SIZE cycles to
// replay, plus one cycle of engine latency.
//
// MCD_CH is passed to every engine's MCD layer (0: one draw per element,
// otherwise one draw per channel of an MCD_CH-channel tensor).
//
// Caching, cloning, concatenation and the spatial/temporal split follow the
// paper; the lockstep broadcast and the mask routing are this design's.
module bayes_exit
  import bnn_pkg::*;
#(
  parameter dropout_e    DROPOUT   = DROP_MCD,
  parameter int unsigned FEAT_SIZE = 400,
  parameter int unsigned N_PASS    = 3,
  parameter int unsigned N_ENGINE  = 3,
  parameter int unsigned EXIT_ID   = 0,
  parameter int unsigned MCD_CH    = 0,
  localparam int unsigned N_ROUND  = (N_PASS + N_ENGINE - 1) / N_ENGINE,
  localparam int unsigned ROUND_W  = (N_ROUND   > 1) ? $clog2(N_ROUND)   : 1,
  localparam int unsigned SAMPLE_W = (N_PASS    > 1) ? $clog2(N_PASS)    : 1,
  localparam int unsigned ADDR_W   = (FEAT_SIZE > 1) ? $clog2(FEAT_SIZE) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  rate_t               keep_rate,
  // Masksembles mask load, by sample number
  input  logic                mask_wr_en,
  input  logic [SAMPLE_W-1:0] mask_wr_sample,
  input  logic [ADDR_W-1:0]   mask_wr_addr,
  input  logic                mask_wr_bit,
  // cached tensor from the non-Bayesian backbone
  input  logic                feat_valid,
  output logic                feat_ready,
  input  data_t               feat_data,
  // one dropped-out stream per MC engine, towards the exit layers
  output logic                drop_valid  [N_ENGINE],
  input  logic                drop_ready  [N_ENGINE],
  output data_t               drop_data   [N_ENGINE],
  output logic                drop_last   [N_ENGINE],
  output logic [SAMPLE_W-1:0] drop_sample [N_ENGINE]
);

  logic               c_valid, c_ready, c_last;
  data_t              c_data;
  logic [ROUND_W-1:0] c_round;
  logic [N_ENGINE-1:0] active, eng_ready;

  feature_cache #(.FEAT_SIZE(FEAT_SIZE), .N_ROUND(N_ROUND)) u_cache (
    .clk, .rst_n,
    .in_valid (feat_valid),
    .in_ready (feat_ready),
    .in_data  (feat_data),
    .out_valid(c_valid),
    .out_ready(c_ready),
    .out_data (c_data),
    .out_last (c_last),
    .out_round(c_round)
  );

  // An engine takes part in a round if its sample number is below N_PASS.
  always_comb begin
    for (int k = 0; k < N_ENGINE; k++)
      active[k] = (32'(c_round) * N_ENGINE + 32'(k)) < N_PASS;
  end

  assign c_ready = &(eng_ready | ~active);

  for (genvar k = 0; k < N_ENGINE; k++) begin : g_eng
    logic [ROUND_W-1:0] e_round;
    logic               m_en;
    logic [ROUND_W-1:0] m_idx;

    assign m_en  = mask_wr_en && (32'(mask_wr_sample) % N_ENGINE == k);
    assign m_idx = ROUND_W'(32'(mask_wr_sample) / N_ENGINE);

    mc_engine #(
      .DROPOUT  (DROPOUT),
      .FEAT_SIZE(FEAT_SIZE),
      .N_MASK   (N_ROUND),
      .SEED     (engine_seed(EXIT_ID, k)),
      .MCD_CH   (MCD_CH)
    ) u_engine (
      .clk, .rst_n, .keep_rate,
      .mask_wr_en  (m_en),
      .mask_wr_idx (m_idx),
      .mask_wr_addr(mask_wr_addr),
      .mask_wr_bit (mask_wr_bit),
      .round       (c_round),
      .in_valid    (c_valid && c_ready && active[k]),
      .in_ready    (eng_ready[k]),
      .in_data     (c_data),
      .in_last     (c_last),
      .out_valid   (drop_valid[k]),
      .out_ready   (drop_ready[k]),
      .out_data    (drop_data[k]),
      .out_last    (drop_last[k]),
      .out_round   (e_round)
    );

    assign drop_sample[k] = SAMPLE_W'(32'(e_round) * N_ENGINE + k);
  end

endmodule
