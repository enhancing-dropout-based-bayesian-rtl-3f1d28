// me_bnn_top: Bayesian datapath of a multi-exit dropout-based Bayesian neural
// network accelerator.
//
// The network is a non-Bayesian backbone with N_EXIT exit branches. Each branch
// starts with a dropout layer (Monte-Carlo dropout or Masksembles, chosen by
// DROPOUT) followed by the exit's own layers. With partial dropout only the
// branch after the dropout layer is sampled, so for every input:
//   1. the backbone streams, for each exit e, the FEAT_SIZE[e]-element tensor
//      that enters that exit's dropout layer into feat_*[e] (one bayes_exit
//      per exit caches it);
//   2. each bayes_exit replays its cached tensor N_PASS times through N_ENGINE
//      MC engines (spatial x temporal mapping) and streams the dropped-out
//      tensors to the exit layers on drop_*[e][k];
//   3. the exit layers return one N_CLASS prediction vector per sample on
//      pred_*[e][k];
//   4. ensemble_avg averages the N_EXIT * N_PASS vectors and offers the mean
//      vector and its argmax on res_*.
// The backbone's convolution, pooling and dense layers and the exit layers
// after the dropout layer are standard NN layers produced by an external HLS
// layer library; they connect through the feat_*, drop_* and pred_* ports.
//
// Run-time configuration: keep_rate (Q0.16, MCD only), held while a model runs;
// Masksembles masks written through mask_wr_* (by exit, sample and position)
// before the first input.
//
// Timing for one input with no stalls: exit e takes FEAT_SIZE[e] cycles to fill
// and ceil(N_PASS/N_ENGINE)*FEAT_SIZE[e] cycles to replay; the result follows
// the last prediction vector by one cycle. Exits run concurrently.
//
// Defaults: two exits as in the two-exit multi-exit BayesNN the paper draws,
// three MC samples per exit on three spatial engines, ten classes (MNIST).
// FEAT_SIZE follows LeNet-5's tensors after its first and second pooling stage
// (6x14x14 and 16x5x5); these sizes are this design's assumption. MCD_CH[e]
// picks the MCD granularity of exit e: 0 (default) draws per element as the
// paper's pseudocode does; a channel count (6 and 16 for these tensors) draws
// per channel, as the paper's prose describes MCD, for channel-innermost data.
module me_bnn_top
  import bnn_pkg::*;
#(
  parameter dropout_e    DROPOUT            = DROP_MCD,
  parameter int unsigned N_EXIT             = 2,
  parameter int unsigned N_PASS             = 3,
  parameter int unsigned N_ENGINE           = 3,
  parameter int unsigned N_CLASS            = 10,
  parameter int unsigned FEAT_SIZE [N_EXIT] = '{1176, 400},
  parameter int unsigned MCD_CH    [N_EXIT] = '{0, 0},
  localparam int unsigned MAX_FEAT = max_size(FEAT_SIZE),
  localparam int unsigned EXIT_W   = (N_EXIT   > 1) ? $clog2(N_EXIT)   : 1,
  localparam int unsigned SAMPLE_W = (N_PASS   > 1) ? $clog2(N_PASS)   : 1,
  localparam int unsigned ADDR_W   = (MAX_FEAT > 1) ? $clog2(MAX_FEAT) : 1,
  localparam int unsigned CLS_W    = (N_CLASS  > 1) ? $clog2(N_CLASS)  : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  rate_t               keep_rate,
  input  logic                mask_wr_en,
  input  logic [EXIT_W-1:0]   mask_wr_exit,
  input  logic [SAMPLE_W-1:0] mask_wr_sample,
  input  logic [ADDR_W-1:0]   mask_wr_addr,
  input  logic                mask_wr_bit,
  input  logic                feat_valid  [N_EXIT],
  output logic                feat_ready  [N_EXIT],
  input  data_t               feat_data   [N_EXIT],
  output logic                drop_valid  [N_EXIT][N_ENGINE],
  input  logic                drop_ready  [N_EXIT][N_ENGINE],
  output data_t               drop_data   [N_EXIT][N_ENGINE],
  output logic                drop_last   [N_EXIT][N_ENGINE],
  output logic [SAMPLE_W-1:0] drop_sample [N_EXIT][N_ENGINE],
  input  logic                pred_valid  [N_EXIT][N_ENGINE],
  output logic                pred_ready  [N_EXIT][N_ENGINE],
  input  data_t               pred_data   [N_EXIT][N_ENGINE][N_CLASS],
  output logic                res_valid,
  input  logic                res_ready,
  output data_t               res_mean    [N_CLASS],
  output logic [CLS_W-1:0]    res_class
);

  function automatic int unsigned max_size(input int unsigned s [N_EXIT]);
    int unsigned m = 1;
    foreach (s[i]) if (s[i] > m) m = s[i];
    return m;
  endfunction

  for (genvar e = 0; e < N_EXIT; e++) begin : g_exit
    localparam int unsigned FS = FEAT_SIZE[e];
    localparam int unsigned AW = (FS > 1) ? $clog2(FS) : 1;

    bayes_exit #(
      .DROPOUT  (DROPOUT),
      .FEAT_SIZE(FS),
      .N_PASS   (N_PASS),
      .N_ENGINE (N_ENGINE),
      .EXIT_ID  (e),
      .MCD_CH   (MCD_CH[e])
    ) u_exit (
      .clk, .rst_n, .keep_rate,
      .mask_wr_en    (mask_wr_en && (mask_wr_exit == EXIT_W'(e))),
      .mask_wr_sample(mask_wr_sample),
      .mask_wr_addr  (AW'(mask_wr_addr)),
      .mask_wr_bit   (mask_wr_bit),
      .feat_valid    (feat_valid[e]),
      .feat_ready    (feat_ready[e]),
      .feat_data     (feat_data[e]),
      .drop_valid    (drop_valid[e]),
      .drop_ready    (drop_ready[e]),
      .drop_data     (drop_data[e]),
      .drop_last     (drop_last[e]),
      .drop_sample   (drop_sample[e])
    );
  end

  ensemble_avg #(
    .N_EXIT  (N_EXIT),
    .N_ENGINE(N_ENGINE),
    .N_PASS  (N_PASS),
    .N_CLASS (N_CLASS)
  ) u_ens (
    .clk, .rst_n,
    .pred_valid, .pred_ready, .pred_data,
    .res_valid, .res_ready, .res_mean, .res_class
  );

endmodule
