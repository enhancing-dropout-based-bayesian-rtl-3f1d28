// tb_me_bnn_full: the design at its default build (Monte-Carlo dropout, two
// exits with 1176- and 400-element tensors, three samples on three parallel
// engines, ten classes), taken through two complete inputs by me_bnn_harness:
// every dropped-out element, every prediction vector and both ensemble results
// are checked against the harness's reference.
module tb_me_bnn_full;
  import bnn_pkg::*;

  localparam int NX = 2, NE = 3, NC = 10;

  logic  clk = 1'b0;
  always #5 clk = ~clk;

  logic  rst_n, mask_wr_en, mask_wr_bit, res_valid, res_ready, done;
  rate_t keep_rate;
  logic [0:0]  mask_wr_exit;
  logic [1:0]  mask_wr_sample;
  logic [10:0] mask_wr_addr;
  logic  feat_valid [NX], feat_ready [NX];
  data_t feat_data [NX];
  logic  drop_valid [NX][NE], drop_ready [NX][NE], drop_last [NX][NE];
  data_t drop_data [NX][NE];
  logic [1:0] drop_sample [NX][NE];
  logic  pred_valid [NX][NE], pred_ready [NX][NE];
  data_t pred_data [NX][NE][NC];
  data_t res_mean [NC];
  logic [3:0] res_class;
  int checks, failures, n_spatial, n_temporal, n_mcd_drop, n_mcd_keep, n_ch_reuse, n_mask_zero;
  int n_drop_stall, n_quota_stall, n_res_stall, n_results;

  me_bnn_top dut (.*);

  me_bnn_harness #(.NIMG(2)) h (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired after %0d results", n_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (5) @(posedge clk);
    wait (done);
    $display("results %0d, elements dropped %0d kept %0d", n_results, n_mcd_drop, n_mcd_keep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
