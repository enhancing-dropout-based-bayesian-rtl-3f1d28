// tb_mcd_layer: streams random activations through the MCD layer with random
// stalls on both sides and compares every output with a reference that draws
// its own xorshift numbers (one per accepted element) and applies
// "zero if u > keep_rate, else x * keep_rate". Also checks the observed drop
// rate against 1 - keep_rate, the `last` flag, and that a stall-free tensor of
// N elements passes in N + 1 cycles (one element per cycle, one cycle latency).
// A second instance with channel granularity (N_CH = 5) takes the same stream;
// its reference draws only for the first five elements of each tensor and
// repeats those keep bits channel by channel for the rest of the tensor.
module tb_mcd_layer;
  import bnn_pkg::*;

  localparam logic [31:0] SEED = 32'h1234_5678;
  localparam int N = 3000;
  localparam int NCH = 5;

  logic  clk = 1'b0, rst_n = 1'b0;
  rate_t keep_rate;
  logic  in_valid = 1'b0, in_ready, in_last = 1'b0, out_valid, out_ready = 1'b0, out_last;
  data_t in_data = '0, out_data;
  int    checks = 0, failures = 0;

  data_t exp_q [$];
  logic  exp_last_q [$];
  int    drops = 0, outs = 0;

  mcd_layer #(.SEED(SEED)) dut (.*);

  logic  c_in_ready, c_out_valid, c_out_last;
  data_t c_out_data;
  data_t c_exp_q [$];
  logic  c_exp_last_q [$];
  int    c_drops = 0, c_keeps = 0;

  mcd_layer #(.SEED(SEED), .N_CH(NCH)) dut_ch (
    .clk, .rst_n, .keep_rate, .in_valid, .in_ready(c_in_ready), .in_data, .in_last,
    .out_valid(c_out_valid), .out_ready, .out_data(c_out_data), .out_last(c_out_last));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, stepped on every accepted input
  logic [31:0] ref_s = SEED;
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    logic [15:0] u;
    longint p;
    u = ref_s[31:16];
    p = (longint'(in_data) * longint'(keep_rate)) >>> 16;
    exp_q.push_back((u > keep_rate) ? data_t'(0) : data_t'(p));
    exp_last_q.push_back(in_last);
    ref_s = ref_s ^ (ref_s << 13);
    ref_s = ref_s ^ (ref_s >> 17);
    ref_s = ref_s ^ (ref_s << 5);
  end

  // reference for the channel-granular instance
  logic [31:0] c_ref_s = SEED;
  bit          c_keep [NCH];
  int          c_pos = 0;
  always @(posedge clk) if (rst_n && in_valid && in_ready) begin
    longint p;
    int     c;
    c = c_pos % NCH;
    if (c_pos < NCH) begin
      c_keep[c] = !(c_ref_s[31:16] > keep_rate);
      c_ref_s = c_ref_s ^ (c_ref_s << 13);
      c_ref_s = c_ref_s ^ (c_ref_s >> 17);
      c_ref_s = c_ref_s ^ (c_ref_s << 5);
    end
    p = (longint'(in_data) * longint'(keep_rate)) >>> 16;
    c_exp_q.push_back(c_keep[c] ? data_t'(p) : data_t'(0));
    c_exp_last_q.push_back(in_last);
    c_pos = in_last ? 0 : c_pos + 1;
  end

  always @(posedge clk) if (rst_n) begin
    if (c_in_ready !== in_ready || c_out_valid !== out_valid) begin
      checks++; failures++;
      $display("channel-granular instance out of step with the element one");
    end
    if (c_out_valid && out_ready) begin
      data_t e;
      logic  el;
      checks++;
      e  = c_exp_q.pop_front();
      el = c_exp_last_q.pop_front();
      if (c_out_data !== e || c_out_last !== el) begin
        failures++;
        if (failures < 10) $display("channel mode: got %0d/%b expected %0d/%b", c_out_data, c_out_last, e, el);
      end
      if (c_out_data == 0) c_drops++; else c_keeps++;
    end
  end

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    outs++;
    if (exp_q.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      data_t e;
      logic  el;
      e  = exp_q.pop_front();
      el = exp_last_q.pop_front();
      if (out_data !== e || out_last !== el) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d/%b expected %0d/%b", outs, out_data, out_last, e, el);
      end
      if (out_data == 0) drops++;
    end
  end

  task automatic send(input int n, input bit stalls);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_data  = data_t'($urandom_range(1, 30000)) * (($urandom_range(0, 1) == 1) ? -1 : 1);
      in_last  = (i == n - 1);
      out_ready = stalls ? ($urandom_range(0, 3) != 0) : 1'b1;
      #1;
      while (!in_ready) begin
        @(negedge clk);
        out_ready = stalls ? ($urandom_range(0, 3) != 0) : 1'b1;
        #1;
      end
      if (stalls && $urandom_range(0, 4) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    in_last  = 1'b0;
  endtask

  initial begin
    keep_rate = 16'hC000;  // 0.75
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int t = 0; t < N / 100; t++) send(100, 1'b1);
    out_ready <= 1'b1;
    repeat (5) @(posedge clk);
    // drop rate: about 25 % of non-zero inputs become 0
    checks++;
    if (drops * 100 < N * 20 || drops * 100 > N * 30) begin
      failures++; $display("drop rate %0d of %0d", drops, N);
    end
    // channel granularity: both outcomes occur
    checks++;
    if (c_drops == 0 || c_keeps == 0) begin
      failures++; $display("channel mode: %0d dropped, %0d kept", c_drops, c_keeps);
    end
    // throughput and latency without stalls: 100 elements, first out after
    // one cycle, last out 100 cycles after the first in
    begin
      int t0, t1, n_before;
      n_before = outs;
      keep_rate = 16'h8000;  // 0.5
      fork
        begin t0 = $time / 10; send(100, 1'b0); end
        begin
          wait (outs == n_before + 100);
          t1 = $time / 10;
        end
      join
      checks++;
      if (t1 - t0 != 101) begin
        failures++; $display("100 elements took %0d cycles, expected 101", t1 - t0);
      end
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || c_exp_q.size() != 0) begin
      failures++; $display("%0d/%0d outputs missing", exp_q.size(), c_exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
