// tb_ensemble_avg: two exits, two return channels each, three samples per exit,
// four classes. For each of 30 inputs the testbench makes six random prediction
// vectors, computes their mean (sum / 6, toward zero) and argmax itself, and
// offers each exit's vectors in order on the channel of the engine that would
// produce them, at random times and without waiting for the previous result,
// so that one exit regularly runs ahead onto the next input. Checks every
// result, that no vector of a later input is taken before the current result
// has been read (the per-exit quota), and that results are held under
// back-pressure. The quota stall must be seen at least once.
module tb_ensemble_avg;
  import bnn_pkg::*;

  localparam int NX = 2, NE = 2, NP = 3, NC = 4, NS = NX * NP, NIMG = 30;

  logic  clk = 1'b0, rst_n = 1'b0;
  logic  pred_valid [NX][NE], pred_ready [NX][NE];
  data_t pred_data  [NX][NE][NC];
  logic  res_valid, res_ready = 1'b0;
  data_t res_mean [NC];
  logic [1:0] res_class;
  int checks = 0, failures = 0, quota_stalls = 0, res_stalls = 0;

  data_t vec [NIMG][NX][NP][NC];
  int    head [NX];          // next (image*NP + sample) to deliver, per exit
  int    img = 0;            // input whose result is expected next

  ensemble_avg #(.N_EXIT(NX), .N_ENGINE(NE), .N_PASS(NP), .N_CLASS(NC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // drive at negedge: each exit offers its next vector on engine (sample % NE)
  always @(negedge clk) begin
    for (int e = 0; e < NX; e++) begin
      for (int k = 0; k < NE; k++) pred_valid[e][k] = 1'b0;
      if (rst_n && head[e] < NIMG * NP && $urandom_range(0, 2) != 0) begin
        int i, s;
        i = head[e] / NP; s = head[e] % NP;
        pred_valid[e][s % NE] = 1'b1;
        for (int c = 0; c < NC; c++) pred_data[e][s % NE][c] = vec[i][e][s][c];
      end
    end
    res_ready = ($urandom_range(0, 2) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < NX; e++)
      for (int k = 0; k < NE; k++) if (pred_valid[e][k]) begin
        if (pred_ready[e][k]) begin
          checks++;
          if (head[e] / NP != img) begin
            failures++; $display("exit %0d vector of input %0d taken while input %0d open", e, head[e] / NP, img);
          end
          head[e]++;
        end else if (!res_valid) quota_stalls++;
      end
    if (res_valid && !res_ready) res_stalls++;
    if (res_valid && res_ready) begin
      int sum;
      data_t m [NC];
      int best;
      best = 0;
      for (int c = 0; c < NC; c++) begin
        sum = 0;
        for (int e = 0; e < NX; e++)
          for (int s = 0; s < NP; s++) sum += int'(vec[img][e][s][c]);
        m[c] = data_t'(sum / NS);
        if (m[c] > m[best]) best = c;
      end
      checks++;
      if (res_mean != m || int'(res_class) != best) begin
        failures++;
        $display("input %0d: class %0d expected %0d, mean0 %0d expected %0d", img, res_class, best, res_mean[0], m[0]);
      end
      img++;
    end
  end

  initial begin
    foreach (head[e]) head[e] = 0;
    foreach (vec[i, e, s, c]) vec[i][e][s][c] = data_t'($urandom_range(0, 20000)) - data_t'(4000);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (img == NIMG);
    repeat (3) @(posedge clk);
    checks++;
    if (quota_stalls == 0) begin failures++; $display("quota stall never happened"); end
    checks++;
    if (res_stalls == 0) begin failures++; $display("result back-pressure never happened"); end
    $display("quota stalls %0d, result stalls %0d", quota_stalls, res_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
