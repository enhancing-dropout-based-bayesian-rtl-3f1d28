// tb_me_bnn_top: end-to-end test of the multi-exit Bayesian datapath in three
// builds, each driven and checked by me_bnn_harness over three inputs:
//   A  Monte-Carlo dropout, three samples on three engines (spatial mapping)
//   B  Masksembles, three samples on one engine (temporal mapping)
//   C  Monte-Carlo dropout, three samples on two engines (mixed mapping; one
//      engine idles in the second round)
//   D  Monte-Carlo dropout per channel (6 and 16 channels), two engines
// All use two exits with 1176- and 400-element cached tensors and ten classes.
// Every dropped-out element, prediction and ensemble result is checked, and each
// mechanism must occur at least once: parallel engines, later temporal rounds,
// MCD drops and keeps, channel keep bits reused, Masksembles zeros, stalls from the exit layers, the
// ensemble holding back an exit that runs ahead, and result back-pressure.
module tb_me_bnn_top;
  import bnn_pkg::*;

  localparam int NX = 2, NP = 3, NC = 10, NIMG = 3;
  localparam int unsigned FS [NX] = '{1176, 400};
  localparam int unsigned CH_ELEM [NX] = '{0, 0};
  localparam int unsigned CH_LENET [NX] = '{6, 16};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // one build of the design plus its harness
  `define ME_BNN_INST(NAME, DROP, NE, CH)                                                         \
    logic                NAME``_rst_n, NAME``_done, NAME``_mwe, NAME``_mwb, NAME``_rv, NAME``_rr; \
    rate_t               NAME``_kr;                                                            \
    logic [0:0]          NAME``_mwx;                                                           \
    logic [1:0]          NAME``_mws;                                                           \
    logic [10:0]         NAME``_mwa;                                                           \
    logic                NAME``_fv [NX], NAME``_fr [NX];                                       \
    data_t               NAME``_fd [NX];                                                       \
    logic                NAME``_dv [NX][NE], NAME``_dr [NX][NE], NAME``_dl [NX][NE];            \
    data_t               NAME``_dd [NX][NE];                                                   \
    logic [1:0]          NAME``_ds [NX][NE];                                                   \
    logic                NAME``_pv [NX][NE], NAME``_pr [NX][NE];                               \
    data_t               NAME``_pd [NX][NE][NC];                                               \
    data_t               NAME``_rm [NC];                                                       \
    logic [3:0]          NAME``_rc;                                                            \
    int NAME``_chk, NAME``_fail, NAME``_sp, NAME``_tp, NAME``_md, NAME``_mk, NAME``_mz, NAME``_cr,        \
        NAME``_dst, NAME``_qst, NAME``_rst, NAME``_nres;                                       \
    me_bnn_top #(.DROPOUT(DROP), .N_EXIT(NX), .N_PASS(NP), .N_ENGINE(NE), .N_CLASS(NC),         \
                 .FEAT_SIZE(FS), .MCD_CH(CH)) NAME``_dut (                                             \
      .clk, .rst_n(NAME``_rst_n), .keep_rate(NAME``_kr),                                       \
      .mask_wr_en(NAME``_mwe), .mask_wr_exit(NAME``_mwx), .mask_wr_sample(NAME``_mws),         \
      .mask_wr_addr(NAME``_mwa), .mask_wr_bit(NAME``_mwb),                                     \
      .feat_valid(NAME``_fv), .feat_ready(NAME``_fr), .feat_data(NAME``_fd),                   \
      .drop_valid(NAME``_dv), .drop_ready(NAME``_dr), .drop_data(NAME``_dd),                   \
      .drop_last(NAME``_dl), .drop_sample(NAME``_ds),                                          \
      .pred_valid(NAME``_pv), .pred_ready(NAME``_pr), .pred_data(NAME``_pd),                   \
      .res_valid(NAME``_rv), .res_ready(NAME``_rr), .res_mean(NAME``_rm), .res_class(NAME``_rc)); \
    me_bnn_harness #(.DROPOUT(DROP), .N_EXIT(NX), .N_PASS(NP), .N_ENGINE(NE), .N_CLASS(NC),     \
                     .FEAT_SIZE(FS), .MCD_CH(CH), .NIMG(NIMG)) NAME``_h (                                   \
      .clk, .rst_n(NAME``_rst_n), .keep_rate(NAME``_kr),                                       \
      .mask_wr_en(NAME``_mwe), .mask_wr_exit(NAME``_mwx), .mask_wr_sample(NAME``_mws),         \
      .mask_wr_addr(NAME``_mwa), .mask_wr_bit(NAME``_mwb),                                     \
      .feat_valid(NAME``_fv), .feat_ready(NAME``_fr), .feat_data(NAME``_fd),                   \
      .drop_valid(NAME``_dv), .drop_ready(NAME``_dr), .drop_data(NAME``_dd),                   \
      .drop_last(NAME``_dl), .drop_sample(NAME``_ds),                                          \
      .pred_valid(NAME``_pv), .pred_ready(NAME``_pr), .pred_data(NAME``_pd),                   \
      .res_valid(NAME``_rv), .res_ready(NAME``_rr), .res_mean(NAME``_rm), .res_class(NAME``_rc), \
      .done(NAME``_done), .checks(NAME``_chk), .failures(NAME``_fail),                         \
      .n_spatial(NAME``_sp), .n_temporal(NAME``_tp), .n_mcd_drop(NAME``_md),                   \
      .n_mcd_keep(NAME``_mk), .n_ch_reuse(NAME``_cr), .n_mask_zero(NAME``_mz), .n_drop_stall(NAME``_dst),              \
      .n_quota_stall(NAME``_qst), .n_res_stall(NAME``_rst), .n_results(NAME``_nres));

  `ME_BNN_INST(a, DROP_MCD, 3, CH_ELEM)
  `ME_BNN_INST(b, DROP_MASK, 1, CH_ELEM)
  `ME_BNN_INST(c, DROP_MCD, 2, CH_ELEM)
  `ME_BNN_INST(d, DROP_MCD, 2, CH_LENET)

  task automatic need(input string what, input int count);
    checks++;
    $display("  %-34s %0d", what, count);
    if (count == 0) begin failures++; $display("  ^ never happened"); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: results a=%0d b=%0d c=%0d d=%0d", a_nres, b_nres, c_nres, d_nres);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    wait (a_done && b_done && c_done && d_done);
    checks   = a_chk + b_chk + c_chk + d_chk;
    failures = a_fail + b_fail + c_fail + d_fail;
    $display("A (MCD, spatial):");
    need("engines active together", a_sp);
    need("MCD elements dropped", a_md);
    need("MCD elements kept", a_mk);
    need("exit-layer stalls", a_dst);
    need("ensemble quota stalls", a_qst);
    need("result back-pressure", a_rst);
    need("results", a_nres);
    $display("B (Masksembles, temporal):");
    need("samples in later rounds", b_tp);
    need("mask zeros", b_mz);
    need("results", b_nres);
    $display("C (MCD, mixed):");
    need("engines active together", c_sp);
    need("samples in later rounds", c_tp);
    need("results", c_nres);
    $display("D (MCD per channel, mixed):");
    need("MCD elements dropped", d_md);
    need("channel keep bits reused", d_cr);
    need("results", d_nres);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
