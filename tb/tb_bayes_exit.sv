// tb_bayes_exit: one Masksembles exit with 5 MC samples on 2 engines (three
// rounds; engine 1 sits out the last round). Loads a random mask per sample,
// sends four random 12-element tensors, and checks every engine output element
// against tensor AND mask of the sample the engine should be computing in that
// round (engine k, round r -> sample 2r+k), the sample tag, and that every
// sample of every tensor appears exactly once. Engine outputs stall at random.
// A final stall-free tensor checks the timing: 12 fill cycles, 3 x 12 replay
// cycles, one cycle of engine latency.
module tb_bayes_exit;
  import bnn_pkg::*;

  localparam int FS = 12, NP = 5, NE = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mask_wr_en = 1'b0, mask_wr_bit = 1'b0;
  logic [2:0] mask_wr_sample = '0;
  logic [3:0] mask_wr_addr = '0;
  logic  feat_valid = 1'b0, feat_ready;
  data_t feat_data = '0;
  logic  drop_valid [NE], drop_ready [NE], drop_last [NE];
  data_t drop_data [NE];
  logic [2:0] drop_sample [NE];
  int checks = 0, failures = 0;
  bit    masks [NP][FS];
  data_t tensor [FS];
  int    pos [NE];
  int    seen [NP];
  bit    stall = 1'b1;
  int    last_out_t = 0;

  bayes_exit #(.DROPOUT(DROP_MASK), .FEAT_SIZE(FS), .N_PASS(NP), .N_ENGINE(NE), .EXIT_ID(0)) dut (
    .clk, .rst_n, .keep_rate(16'h0), .mask_wr_en, .mask_wr_sample, .mask_wr_addr, .mask_wr_bit,
    .feat_valid, .feat_ready, .feat_data,
    .drop_valid, .drop_ready, .drop_data, .drop_last, .drop_sample);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk)
    for (int k = 0; k < NE; k++) drop_ready[k] = stall ? ($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < NE; k++) if (drop_valid[k] && drop_ready[k]) begin
      int s;
      data_t e;
      s = int'(drop_sample[k]);
      e = masks[s][pos[k]] ? tensor[pos[k]] : data_t'(0);
      checks++;
      if (s % NE != k || s >= NP || drop_data[k] !== e || drop_last[k] !== (pos[k] == FS - 1)) begin
        failures++;
        if (failures < 10) $display("engine %0d sample %0d elem %0d: got %0d expected %0d", k, s, pos[k], drop_data[k], e);
      end
      if (pos[k] == FS - 1) begin
        pos[k] = 0;
        if (s < NP) seen[s]++;
      end else pos[k]++;
      last_out_t = $time / 10;
    end
  end

  task automatic send_tensor();
    foreach (tensor[i]) tensor[i] = data_t'($urandom_range(1, 30000));
    for (int i = 0; i < FS; i++) begin
      @(negedge clk);
      feat_valid = 1'b1;
      feat_data  = tensor[i];
      #1;
      while (!feat_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk);
    feat_valid = 1'b0;
  endtask

  task automatic wait_done();
    int guard = 0;
    while (!(seen[NP-1] > 0 && feat_ready) && guard < 2000) begin
      @(posedge clk); guard++;
    end
    repeat (3) @(posedge clk);
    for (int s = 0; s < NP; s++) begin
      checks++;
      if (seen[s] != 1) begin failures++; $display("sample %0d seen %0d times", s, seen[s]); end
      seen[s] = 0;
    end
  endtask

  initial begin
    foreach (pos[k]) pos[k] = 0;
    foreach (seen[s]) seen[s] = 0;
    for (int s = 0; s < NP; s++)
      for (int i = 0; i < FS; i++) masks[s][i] = ($urandom_range(0, 2) != 0);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NP; s++)
      for (int i = 0; i < FS; i++) begin
        mask_wr_en = 1'b1; mask_wr_sample = 3'(s); mask_wr_addr = 4'(i); mask_wr_bit = masks[s][i];
        @(negedge clk);
      end
    mask_wr_en = 1'b0;
    repeat (4) begin
      send_tensor();
      wait_done();
    end
    // stall-free timing
    stall = 1'b0;
    begin
      int t0;
      @(negedge clk);
      t0 = $time / 10;
      send_tensor();
      wait_done();
      checks++;
      // first element offered one cycle after t0, 12 fill cycles, 36 replay
      // cycles, then one cycle of engine latency
      if (last_out_t - t0 != 1 + FS + 3 * FS) begin
        failures++; $display("tensor took %0d cycles, expected %0d", last_out_t - t0, 1 + FS + 3 * FS);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
