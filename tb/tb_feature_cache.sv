// tb_feature_cache: writes a 16-element tensor into a cache replaying 3 rounds
// and checks that every round returns the whole tensor in order, with the
// round number and `last` on the final element, under random consumer stalls;
// that no new tensor is accepted during replay; and, stall-free, that fill
// takes 16 cycles and replay 3 x 16 cycles. Three tensors are run back to back.
module tb_feature_cache;
  import bnn_pkg::*;

  localparam int FS = 16, NR = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0, out_last;
  data_t in_data = '0, out_data;
  logic [1:0] out_round;
  int checks = 0, failures = 0;
  data_t tensor [FS];

  feature_cache #(.FEAT_SIZE(FS), .N_ROUND(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit stalls);
    int t0, t1, t2;
    foreach (tensor[i]) tensor[i] = data_t'($urandom);
    t0 = $time / 10;
    for (int i = 0; i < FS; i++) begin
      in_valid <= 1'b1;
      in_data  <= tensor[i];
      do @(posedge clk); while (!in_ready);
    end
    in_valid <= 1'b0;
    t1 = $time / 10;
    for (int r = 0; r < NR; r++)
      for (int i = 0; i < FS; i++) begin
        out_ready <= stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
        #1;
        while (!(out_valid && out_ready)) begin
          @(posedge clk);
          out_ready <= stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
          #1;
        end
        checks++;
        if (out_data !== tensor[i] || out_round !== 2'(r) || out_last !== (i == FS - 1) || in_ready) begin
          failures++;
          if (failures < 10) $display("round %0d elem %0d: got %h r%0d l%b expected %h", r, i, out_data, out_round, out_last, tensor[i]);
        end
        @(posedge clk);
      end
    out_ready <= 1'b0;
    t2 = $time / 10;
    if (!stalls) begin
      checks++;
      if (t1 - t0 != FS || t2 - t1 != NR * FS) begin
        failures++; $display("fill %0d cycles, replay %0d cycles", t1 - t0, t2 - t1);
      end
    end
    #1;
    checks++;
    if (!in_ready || out_valid) begin failures++; $display("cache did not return to fill"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run(1'b1);
    run(1'b0);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
