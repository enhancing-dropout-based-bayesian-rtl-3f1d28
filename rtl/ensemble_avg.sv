// ensemble_avg: equally weighted ensemble of the predictions of all exits and
// all Monte-Carlo samples.
//
// Every exit delivers N_PASS prediction vectors of N_CLASS entries per input,
// one per MC sample, on its N_ENGINE return channels. The block sums them per
// class and, once all N_SAMPLE = N_EXIT * N_PASS vectors of an input are in,
// outputs the mean vector (sum / N_SAMPLE, signed, rounded toward zero) and the
// index of its largest entry (lowest index on a tie) as the predicted class.
//
// Each exit has a quota of N_PASS vectors per input: a channel is ready only
// while its exit's quota is not yet met and no finished result is waiting, so
// an exit that runs ahead onto the next input is held back instead of mixing
// inputs. Engines of one exit that deliver in the same cycle are granted in
// engine order within the remaining quota. Any number of channels may be
// accepted in one cycle.
//
// Timing: the result register is loaded in the cycle the last vector is
// accepted and is offered (res_valid) from the next cycle until res_ready.
//
// Averaging the exits' predictions with equal weights is the paper's; the
// quota rule, the fixed-point division and the argmax output are this design's.
module ensemble_avg
  import bnn_pkg::*;
#(
  parameter int unsigned N_EXIT   = 2,
  parameter int unsigned N_ENGINE = 3,
  parameter int unsigned N_PASS   = 3,
  parameter int unsigned N_CLASS  = 10,
  localparam int unsigned N_SAMPLE = N_EXIT * N_PASS,
  localparam int unsigned ACC_W    = DATA_W + $clog2(N_SAMPLE + 1) + 1,
  localparam int unsigned CNT_W    = $clog2(N_PASS + 1),
  localparam int unsigned CLS_W    = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             pred_valid [N_EXIT][N_ENGINE],
  output logic             pred_ready [N_EXIT][N_ENGINE],
  input  data_t            pred_data  [N_EXIT][N_ENGINE][N_CLASS],
  output logic             res_valid,
  input  logic             res_ready,
  output data_t            res_mean   [N_CLASS],
  output logic [CLS_W-1:0] res_class
);

  localparam logic signed [ACC_W-1:0] DIVISOR = ACC_W'(N_SAMPLE);

  logic signed [ACC_W-1:0] acc   [N_CLASS];
  logic signed [ACC_W-1:0] acc_n [N_CLASS];
  logic [CNT_W-1:0]        cnt   [N_EXIT];
  logic [CNT_W-1:0]        cnt_n [N_EXIT];
  logic                    done;
  data_t                   mean  [N_CLASS];
  logic [CLS_W-1:0]        best;

  always_comb begin
    acc_n = acc;
    cnt_n = cnt;
    for (int e = 0; e < N_EXIT; e++) begin
      for (int k = 0; k < N_ENGINE; k++) begin
        pred_ready[e][k] = !res_valid && (cnt_n[e] < CNT_W'(N_PASS));
        if (pred_valid[e][k] && pred_ready[e][k]) begin
          cnt_n[e] = cnt_n[e] + 1'b1;
          for (int c = 0; c < N_CLASS; c++)
            acc_n[c] = acc_n[c] + ACC_W'(pred_data[e][k][c]);
        end
      end
    end
    done = 1'b1;
    for (int e = 0; e < N_EXIT; e++)
      if (cnt_n[e] != CNT_W'(N_PASS)) done = 1'b0;
    for (int c = 0; c < N_CLASS; c++)
      mean[c] = data_t'(acc_n[c] / DIVISOR);
    best = '0;
    for (int c = 1; c < N_CLASS; c++)
      if (mean[c] > mean[best]) best = CLS_W'(c);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_class <= '0;
      for (int c = 0; c < N_CLASS; c++) begin
        acc[c]      <= '0;
        res_mean[c] <= '0;
      end
      for (int e = 0; e < N_EXIT; e++) cnt[e] <= '0;
    end else if (res_valid) begin
      if (res_ready) res_valid <= 1'b0;
    end else if (done) begin
      res_valid <= 1'b1;
      res_mean  <= mean;
      res_class <= best;
      for (int c = 0; c < N_CLASS; c++) acc[c] <= '0;
      for (int e = 0; e < N_EXIT; e++)  cnt[e] <= '0;
    end else begin
      acc <= acc_n;
      cnt <= cnt_n;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           res_valid && !res_ready |=> res_valid && $stable(res_class));

endmodule
