// exit_head_model: behavioural stand-in for the layers of an exit branch that
// follow the dropout layer (convolutions, dense layers and classifier, which an
// external HLS layer library generates). Not synthesizable; testbench only.
//
// It consumes one dropped-out tensor, adds element i into class i mod N_CLASS,
// and on the tensor's last element offers the N_CLASS sums shifted right by 3
// as the prediction vector, holding it until accepted. Its input ready is
// random (about one cycle in four low, when STALL is set) so that the design
// sees back-pressure. The same formula is recomputed in the testbenches.
module exit_head_model
  import bnn_pkg::*;
#(
  parameter int unsigned N_CLASS = 10,
  parameter bit          STALL   = 1'b1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_data,
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data [N_CLASS]
);

  int    acc [N_CLASS];
  int    pos;
  logic  rnd_ok;

  assign in_ready = !out_valid && rnd_ok;

  always @(posedge clk) begin
    if (!rst_n) begin
      pos = 0;
      out_valid <= 1'b0;
      rnd_ok    <= 1'b1;
      foreach (acc[c]) acc[c] = 0;
      foreach (out_data[c]) out_data[c] <= '0;
    end else begin
      rnd_ok <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        acc[pos % N_CLASS] += int'(in_data);
        pos++;
        if (in_last) begin
          foreach (acc[c]) out_data[c] <= data_t'(acc[c] >>> 3);
          out_valid <= 1'b1;
          foreach (acc[c]) acc[c] = 0;
          pos = 0;
        end
      end
    end
  end

endmodule
