// me_bnn_harness: drives and checks one me_bnn_top instance end to end.
// Testbench only; the testbench instantiates the design and this harness side
// by side and passes the design's parameters to both.
//
// It plays every part around the design: the backbone (random FEAT_SIZE[e]
// tensors for NIMG inputs per exit, each exit streaming ahead as fast as the
// design takes them, with random gaps), the Masksembles mask loader (random
// masks, written before the first input), the exit layers (one
// exit_head_model per engine, with random back-pressure) and the result reader
// (random res_ready). An independent reference recomputes every dropped-out
// element (its own xorshift stream per engine, drawn per element or, when
// MCD_CH[e] is set, once per channel in a tensor's first pixel; or the mask
// bit), the order of
// samples on each engine, each prediction vector, and the mean and class of
// every result. It counts checks, failures and how often each mechanism
// occurred: spatial engines active together, temporal rounds after the first,
// MCD drops and keeps, channel keep bits reused, mask zeros, engine-output stalls, ensemble quota stalls
// and result back-pressure.
module me_bnn_harness
  import bnn_pkg::*;
#(
  parameter dropout_e    DROPOUT            = DROP_MCD,
  parameter int unsigned N_EXIT             = 2,
  parameter int unsigned N_PASS             = 3,
  parameter int unsigned N_ENGINE           = 3,
  parameter int unsigned N_CLASS            = 10,
  parameter int unsigned FEAT_SIZE [N_EXIT] = '{1176, 400},
  parameter int unsigned MCD_CH    [N_EXIT] = '{0, 0},
  parameter int unsigned NIMG               = 3,
  parameter logic [15:0] KEEP_RATE          = 16'hC000,
  parameter int unsigned MAX_FEAT           = 1176,
  localparam int unsigned EXIT_W   = (N_EXIT   > 1) ? $clog2(N_EXIT)   : 1,
  localparam int unsigned SAMPLE_W = (N_PASS   > 1) ? $clog2(N_PASS)   : 1,
  localparam int unsigned ADDR_W   = (MAX_FEAT > 1) ? $clog2(MAX_FEAT) : 1,
  localparam int unsigned CLS_W    = (N_CLASS  > 1) ? $clog2(N_CLASS)  : 1,
  localparam int unsigned N_ROUND  = (N_PASS + N_ENGINE - 1) / N_ENGINE
) (
  input  logic                clk,
  output logic                rst_n,
  output rate_t               keep_rate,
  output logic                mask_wr_en,
  output logic [EXIT_W-1:0]   mask_wr_exit,
  output logic [SAMPLE_W-1:0] mask_wr_sample,
  output logic [ADDR_W-1:0]   mask_wr_addr,
  output logic                mask_wr_bit,
  output logic                feat_valid  [N_EXIT],
  input  logic                feat_ready  [N_EXIT],
  output data_t               feat_data   [N_EXIT],
  input  logic                drop_valid  [N_EXIT][N_ENGINE],
  output logic                drop_ready  [N_EXIT][N_ENGINE],
  input  data_t               drop_data   [N_EXIT][N_ENGINE],
  input  logic                drop_last   [N_EXIT][N_ENGINE],
  input  logic [SAMPLE_W-1:0] drop_sample [N_EXIT][N_ENGINE],
  output logic                pred_valid  [N_EXIT][N_ENGINE],
  input  logic                pred_ready  [N_EXIT][N_ENGINE],
  output data_t               pred_data   [N_EXIT][N_ENGINE][N_CLASS],
  input  logic                res_valid,
  output logic                res_ready,
  input  data_t               res_mean    [N_CLASS],
  input  logic [CLS_W-1:0]    res_class,
  output logic                done,
  output int                  checks,
  output int                  failures,
  output int                  n_spatial,
  output int                  n_temporal,
  output int                  n_mcd_drop,
  output int                  n_mcd_keep,
  output int                  n_ch_reuse,
  output int                  n_mask_zero,
  output int                  n_drop_stall,
  output int                  n_quota_stall,
  output int                  n_res_stall,
  output int                  n_results
);

  localparam int unsigned NS = N_EXIT * N_PASS;

  data_t       feat   [NIMG][N_EXIT][MAX_FEAT];
  bit          mask   [N_EXIT][N_PASS][MAX_FEAT];
  int          expv   [NIMG][N_EXIT][N_PASS][N_CLASS];   // expected prediction vectors
  logic [31:0] rs     [N_EXIT][N_ENGINE];               // reference random state
  int          pos    [N_EXIT][N_ENGINE];
  int          tcount [N_EXIT][N_ENGINE];               // tensors finished per engine
  int          hacc   [N_EXIT][N_ENGINE][N_CLASS];
  bit          kch    [N_EXIT][N_ENGINE][256];         // reference channel keep bits
  int          spk    [N_ENGINE];                       // samples per input on engine k

  // ---------------------------------------------------------------- exit layers
  for (genvar e = 0; e < N_EXIT; e++) begin : g_e
    for (genvar k = 0; k < N_ENGINE; k++) begin : g_k
      exit_head_model #(.N_CLASS(N_CLASS), .STALL(1'b1)) u_head (
        .clk, .rst_n,
        .in_valid (drop_valid[e][k]),
        .in_ready (drop_ready[e][k]),
        .in_data  (drop_data[e][k]),
        .in_last  (drop_last[e][k]),
        .out_valid(pred_valid[e][k]),
        .out_ready(pred_ready[e][k]),
        .out_data (pred_data[e][k])
      );
    end
  end

  // ---------------------------------------------------------------- reference
  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < N_EXIT; e++) begin
      int nv;
      nv = 0;
      for (int k = 0; k < N_ENGINE; k++) begin
        if (drop_valid[e][k]) nv++;
        if (drop_valid[e][k] && !drop_ready[e][k]) n_drop_stall++;
        if (drop_valid[e][k] && drop_ready[e][k]) begin
          int n, s, es, p;
          data_t x, ex;
          n  = tcount[e][k] / spk[k];
          es = k + N_ENGINE * (tcount[e][k] % spk[k]);
          s  = int'(drop_sample[e][k]);
          p  = pos[e][k];
          x  = feat[n][e][p];
          if (DROPOUT == DROP_MCD) begin
            longint prod;
            prod = (longint'(x) * longint'(KEEP_RATE)) >>> 16;
            if (MCD_CH[e] == 0 || p < int'(MCD_CH[e])) begin
              bit kb;
              kb = !(rs[e][k][31:16] > KEEP_RATE);
              if (MCD_CH[e] != 0) kch[e][k][p] = kb;
              ex = kb ? data_t'(prod) : data_t'(0);
              rs[e][k] = rs[e][k] ^ (rs[e][k] << 13);
              rs[e][k] = rs[e][k] ^ (rs[e][k] >> 17);
              rs[e][k] = rs[e][k] ^ (rs[e][k] << 5);
            end else begin
              ex = kch[e][k][p % int'(MCD_CH[e])] ? data_t'(prod) : data_t'(0);
              n_ch_reuse++;
            end
            if (ex == 0 && x != 0) n_mcd_drop++; else n_mcd_keep++;
          end else begin
            ex = mask[e][es][p] ? x : data_t'(0);
            if (!mask[e][es][p]) n_mask_zero++;
          end
          checks++;
          if (s != es || drop_data[e][k] !== ex || drop_last[e][k] !== (p == int'(FEAT_SIZE[e]) - 1)) begin
            failures++;
            if (failures < 10)
              $display("input %0d exit %0d engine %0d sample %0d/%0d elem %0d: got %0d expected %0d",
                       n, e, k, s, es, p, drop_data[e][k], ex);
          end
          hacc[e][k][p % N_CLASS] += int'(ex);
          if (p == int'(FEAT_SIZE[e]) - 1) begin
            for (int c = 0; c < N_CLASS; c++) begin
              expv[n][e][es][c] = int'(data_t'(hacc[e][k][c] >>> 3));
              hacc[e][k][c] = 0;
            end
            if (es >= N_ENGINE) n_temporal++;
            pos[e][k] = 0;
            tcount[e][k]++;
          end else pos[e][k]++;
        end
        if (pred_valid[e][k] && !pred_ready[e][k] && !res_valid) n_quota_stall++;
      end
      if (nv > 1) n_spatial++;
    end
    if (res_valid && !res_ready) n_res_stall++;
    if (res_valid && res_ready) begin
      int sum, best;
      data_t m [N_CLASS];
      best = 0;
      for (int c = 0; c < N_CLASS; c++) begin
        sum = 0;
        for (int e = 0; e < N_EXIT; e++)
          for (int s = 0; s < N_PASS; s++) sum += expv[n_results][e][s][c];
        m[c] = data_t'(sum / int'(NS));
        if (m[c] > m[best]) best = c;
      end
      checks++;
      if (res_mean != m || int'(res_class) != best) begin
        failures++;
        $display("result %0d: class %0d expected %0d, mean[0] %0d expected %0d",
                 n_results, res_class, best, res_mean[0], m[0]);
      end
      n_results++;
    end
  end

  always @(negedge clk) res_ready = ($urandom_range(0, 2) != 0);

  // ---------------------------------------------------------------- stimulus
  initial begin
    rst_n = 1'b0; done = 1'b0; keep_rate = KEEP_RATE;
    mask_wr_en = 1'b0; mask_wr_exit = '0; mask_wr_sample = '0; mask_wr_addr = '0; mask_wr_bit = 1'b0;
    checks = 0; failures = 0; n_spatial = 0; n_temporal = 0; n_mcd_drop = 0; n_mcd_keep = 0; n_ch_reuse = 0;
    n_mask_zero = 0; n_drop_stall = 0; n_quota_stall = 0; n_res_stall = 0; n_results = 0;
    for (int k = 0; k < N_ENGINE; k++) begin
      spk[k] = 0;
      for (int r = 0; r < N_ROUND; r++) if (r * N_ENGINE + k < N_PASS) spk[k]++;
    end
    for (int e = 0; e < N_EXIT; e++) begin
      feat_valid[e] = 1'b0; feat_data[e] = '0;
      for (int k = 0; k < N_ENGINE; k++) begin
        rs[e][k] = engine_seed(e, k); pos[e][k] = 0; tcount[e][k] = 0;
        for (int c = 0; c < N_CLASS; c++) hacc[e][k][c] = 0;
      end
    end
    foreach (feat[n, e, i]) feat[n][e][i] = data_t'($urandom_range(0, 16000)) - data_t'(4000);
    foreach (mask[e, s, i]) mask[e][s][i] = ($urandom_range(0, 3) != 0);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    if (DROPOUT == DROP_MASK) begin
      for (int e = 0; e < N_EXIT; e++)
        for (int s = 0; s < N_PASS; s++)
          for (int i = 0; i < int'(FEAT_SIZE[e]); i++) begin
            mask_wr_en = 1'b1; mask_wr_exit = EXIT_W'(e); mask_wr_sample = SAMPLE_W'(s);
            mask_wr_addr = ADDR_W'(i); mask_wr_bit = mask[e][s][i];
            @(negedge clk);
          end
      mask_wr_en = 1'b0;
    end
    wait (n_results == NIMG);
    repeat (2) @(negedge clk);
    done = 1'b1;
  end

  // one backbone stream per exit
  for (genvar e = 0; e < N_EXIT; e++) begin : g_feed
    initial begin
      wait (rst_n);
      @(negedge clk);
      wait (!mask_wr_en);
      for (int n = 0; n < NIMG; n++)
        for (int i = 0; i < int'(FEAT_SIZE[e]); i++) begin
          @(negedge clk);
          feat_valid[e] = ($urandom_range(0, 7) != 0);
          while (!feat_valid[e]) begin @(negedge clk); feat_valid[e] = ($urandom_range(0, 7) != 0); end
          feat_data[e] = feat[n][e][i];
          #1;
          while (!feat_ready[e]) begin @(negedge clk); #1; end
        end
      @(negedge clk);
      feat_valid[e] = 1'b0;
    end
  end

endmodule
