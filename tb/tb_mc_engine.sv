// tb_mc_engine: builds one MC engine of each dropout kind (MCD and Masksembles,
// two masks of 8 bits) and streams 8-element tensors through both, alternating
// the round number. Checks each engine's data against its own reference
// (xorshift draw or mask bit), that `last` closes every tensor, and that each
// output tensor carries the round it was sent in.
module tb_mc_engine;
  import bnn_pkg::*;

  localparam int FS = 8, NM = 2;
  localparam logic [31:0] SEED = 32'hCAFE_0001;

  logic  clk = 1'b0, rst_n = 1'b0;
  rate_t keep_rate = 16'hA000;  // 0.625
  logic  mask_wr_en = 1'b0, mask_wr_bit = 1'b0;
  logic  mask_wr_idx = 1'b0, round = 1'b0;
  logic [2:0] mask_wr_addr = '0;
  logic  in_valid = 1'b0, in_last = 1'b0;
  data_t in_data = '0;
  logic  rdy_m, rdy_k, v_m, v_k, l_m, l_k, r_m, r_k;
  data_t d_m, d_k;
  int    checks = 0, failures = 0;
  bit    masks [NM][FS];
  logic [31:0] ref_s = SEED;
  int    pos = 0, n_out_m = 0, n_out_k = 0;
  data_t exp_m [$], exp_k [$];
  logic  exp_r [$], exp_l [$];

  mc_engine #(.DROPOUT(DROP_MCD), .FEAT_SIZE(FS), .N_MASK(NM), .SEED(SEED)) u_mcd (
    .clk, .rst_n, .keep_rate, .mask_wr_en, .mask_wr_idx, .mask_wr_addr, .mask_wr_bit,
    .round, .in_valid, .in_ready(rdy_m), .in_data, .in_last,
    .out_valid(v_m), .out_ready(1'b1), .out_data(d_m), .out_last(l_m), .out_round(r_m));

  mc_engine #(.DROPOUT(DROP_MASK), .FEAT_SIZE(FS), .N_MASK(NM), .SEED(SEED)) u_mask (
    .clk, .rst_n, .keep_rate, .mask_wr_en, .mask_wr_idx, .mask_wr_addr, .mask_wr_bit,
    .round, .in_valid, .in_ready(rdy_k), .in_data, .in_last,
    .out_valid(v_k), .out_ready(1'b1), .out_data(d_k), .out_last(l_k), .out_round(r_k));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // references, both engines take every element (ready is always high here)
  always @(posedge clk) if (rst_n && in_valid) begin
    longint p;
    p = (longint'(in_data) * longint'(keep_rate)) >>> 16;
    exp_m.push_back((ref_s[31:16] > keep_rate) ? data_t'(0) : data_t'(p));
    exp_k.push_back(masks[round][pos] ? in_data : data_t'(0));
    exp_r.push_back(round);
    exp_l.push_back(in_last);
    ref_s = ref_s ^ (ref_s << 13);
    ref_s = ref_s ^ (ref_s >> 17);
    ref_s = ref_s ^ (ref_s << 5);
    pos = (pos == FS - 1) ? 0 : pos + 1;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (v_m !== v_k) begin failures++; $display("engines out of step"); end
    if (v_m) begin
      data_t em, ek;
      logic er, el;
      em = exp_m.pop_front(); ek = exp_k.pop_front();
      er = exp_r.pop_front(); el = exp_l.pop_front();
      checks += 2;
      if (d_m !== em || l_m !== el || r_m !== er) begin
        failures++;
        if (failures < 10) $display("mcd: got %0d l%b r%b expected %0d l%b r%b", d_m, l_m, r_m, em, el, er);
      end
      if (d_k !== ek || l_k !== el || r_k !== er) begin
        failures++;
        if (failures < 10) $display("mask: got %0d l%b r%b expected %0d l%b r%b", d_k, l_k, r_k, ek, el, er);
      end
    end
  end

  initial begin
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < FS; i++) masks[m][i] = ($urandom_range(0, 1) == 1);
    masks[0][0] = 1'b0;  // make sure both masks differ somewhere
    masks[1][0] = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int m = 0; m < NM; m++)
      for (int i = 0; i < FS; i++) begin
        mask_wr_en = 1'b1; mask_wr_idx = m[0]; mask_wr_addr = 3'(i); mask_wr_bit = masks[m][i];
        @(negedge clk);
      end
    mask_wr_en = 1'b0;
    for (int t = 0; t < 12; t++)
      for (int i = 0; i < FS; i++) begin
        in_valid = 1'b1;
        in_data  = data_t'($urandom_range(1, 20000));
        in_last  = (i == FS - 1);
        round    = t[0];
        @(negedge clk);
      end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (exp_m.size() != 0) begin failures++; $display("%0d outputs missing", exp_m.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
