// tb_masksembles_layer: loads three random masks of 20 bits through the write
// port, then streams several 20-element tensors with each mask index in turn,
// with random stalls on both sides. Every output must equal the input where
// the selected mask bit is 1 and 0 where it is 0; `last` must pass through.
// A stall-free tensor must take 20 + 1 cycles.
module tb_masksembles_layer;
  import bnn_pkg::*;

  localparam int MN = 3, MS = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mask_wr_en = 1'b0, mask_wr_bit = 1'b0;
  logic [1:0] mask_wr_idx = '0, mask_index = '0;
  logic [4:0] mask_wr_addr = '0;
  logic  in_valid = 1'b0, in_ready, in_last = 1'b0, out_valid, out_ready = 1'b0, out_last;
  data_t in_data = '0, out_data;
  int    checks = 0, failures = 0, outs = 0;
  bit    masks [MN][MS];
  data_t exp_q [$];
  logic  exp_last_q [$];
  int    in_pos = 0;

  masksembles_layer #(.MASK_NUM(MN), .MASK_SIZE(MS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    exp_q.push_back(masks[mask_index][in_pos] ? in_data : data_t'(0));
    exp_last_q.push_back(in_last);
    in_pos = (in_pos == MS - 1) ? 0 : in_pos + 1;
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    data_t e;
    logic  el;
    checks++;
    outs++;
    e  = exp_q.pop_front();
    el = exp_last_q.pop_front();
    if (out_data !== e || out_last !== el) begin
      failures++;
      if (failures < 10) $display("out %0d: got %0d/%b expected %0d/%b", outs, out_data, out_last, e, el);
    end
  end

  task automatic send_tensor(input int idx, input bit stalls);
    mask_index <= 2'(idx);
    for (int i = 0; i < MS; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = data_t'($urandom_range(1, 60000));
      in_last  = (i == MS - 1);
      out_ready = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      while (!in_ready) begin
        @(negedge clk);
        out_ready = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
        #1;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_last  = 1'b0;
  endtask

  initial begin
    for (int m = 0; m < MN; m++)
      for (int i = 0; i < MS; i++) masks[m][i] = ($urandom_range(0, 2) != 0);
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    for (int m = 0; m < MN; m++)
      for (int i = 0; i < MS; i++) begin
        mask_wr_en   <= 1'b1;
        mask_wr_idx  <= 2'(m);
        mask_wr_addr <= 5'(i);
        mask_wr_bit  <= masks[m][i];
        @(posedge clk);
      end
    mask_wr_en <= 1'b0;
    @(posedge clk);
    for (int r = 0; r < 4; r++)
      for (int m = 0; m < MN; m++) send_tensor(m, 1'b1);
    out_ready <= 1'b1;
    repeat (5) @(posedge clk);
    begin
      int t0, t1, n0;
      n0 = outs;
      fork
        begin t0 = $time / 10; send_tensor(2, 1'b0); end
        begin wait (outs == n0 + MS); t1 = $time / 10; end
      join
      checks++;
      if (t1 - t0 != MS + 1) begin failures++; $display("tensor took %0d cycles", t1 - t0); end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
