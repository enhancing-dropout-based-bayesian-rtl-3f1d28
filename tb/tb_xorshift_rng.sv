// tb_xorshift_rng: checks the MCD random source against a reference xorshift
// written out here, with the enable toggled at random (the number must hold
// while en is low), and checks that the numbers cover [0,1) evenly enough
// (each quarter of the range gets 20-30 % of 4000 draws).
module tb_xorshift_rng;
  import bnn_pkg::*;

  localparam logic [31:0] SEED = 32'hDEAD_BEEF;

  logic  clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  rate_t rnd;
  int    checks = 0, failures = 0;
  int    quarter [4] = '{0, 0, 0, 0};

  xorshift_rng #(.SEED(SEED)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ref_s;
    ref_s = SEED;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 6000; n++) begin
      en <= ($urandom_range(0, 3) != 0);
      #1;
      checks++;
      if (rnd !== ref_s[31:16]) begin
        failures++;
        if (failures < 10) $display("step %0d: rnd %h expected %h", n, rnd, ref_s[31:16]);
      end
      if (en) begin
        if (n < 4000) quarter[rnd[15:14]]++;
        ref_s = ref_s ^ (ref_s << 13);
        ref_s = ref_s ^ (ref_s >> 17);
        ref_s = ref_s ^ (ref_s << 5);
      end
      @(posedge clk);
    end
    begin
      int total;
      total = quarter[0] + quarter[1] + quarter[2] + quarter[3];
      for (int q = 0; q < 4; q++) begin
        checks++;
        if (quarter[q] * 10 < total * 2 || quarter[q] * 10 > total * 3) begin
          failures++;
          $display("quarter %0d got %0d of %0d", q, quarter[q], total);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
