// masksembles_layer: Masksembles dropout layer, one activation per cycle.
//
// Masksembles replaces run-time Bernoulli sampling with MASK_NUM binary masks
// of MASK_SIZE bits each, fixed before inference. For the i-th activation of a
// tensor the layer looks up generated_masks[mask_index][i]: a 1 passes the
// activation, a 0 forces the output to 0. The element position i is counted
// inside the layer and wraps after MASK_SIZE elements, so every tensor must
// hold exactly MASK_SIZE elements (checked against `in_last` by an assertion).
// mask_index selects the ensemble member and must be held for a whole tensor.
//
// The masks are inputs, not sampled: they are written one bit per cycle through
// the mask_wr_* port before a run (a write does not disturb a stream, but the
// stream reads the new bit if both hit the same position). The table is a plain
// array, so a synthesis tool may map it to distributed RAM or registers.
//
// Interface and timing: valid/ready streams with `last`, one output register,
// latency one cycle, one element per cycle (in_ready = !out_valid || out_ready).
//
// The select-or-zero rule and the mask table indexed by (mask_index, i) follow
// the paper's pseudocode; the bit-serial load port and the stream handshake are
// this design's choices. How masks are generated (the "scale" parameter of
// Masksembles) is done off-chip.
module masksembles_layer
  import bnn_pkg::*;
#(
  parameter int unsigned MASK_NUM  = 3,
  parameter int unsigned MASK_SIZE = 400,
  localparam int unsigned IDX_W  = (MASK_NUM  > 1) ? $clog2(MASK_NUM)  : 1,
  localparam int unsigned ADDR_W = (MASK_SIZE > 1) ? $clog2(MASK_SIZE) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // mask table load
  input  logic              mask_wr_en,
  input  logic [IDX_W-1:0]  mask_wr_idx,
  input  logic [ADDR_W-1:0] mask_wr_addr,
  input  logic              mask_wr_bit,
  // member selection
  input  logic [IDX_W-1:0]  mask_index,
  // activation stream
  input  logic              in_valid,
  output logic              in_ready,
  input  data_t             in_data,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output data_t             out_data,
  output logic              out_last
);

  logic [MASK_SIZE-1:0] generated_masks [MASK_NUM];
  logic [ADDR_W-1:0]    elem;
  logic                 mask_value;
  logic                 fire;

  assign in_ready   = !out_valid || out_ready;
  assign fire       = in_valid && in_ready;
  assign mask_value = generated_masks[mask_index][elem];

  always_ff @(posedge clk) begin
    if (mask_wr_en) generated_masks[mask_wr_idx][mask_wr_addr] <= mask_wr_bit;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      elem      <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      if (in_ready) out_valid <= in_valid;
      if (fire) begin
        out_data <= mask_value ? in_data : data_t'(0);
        out_last <= in_last;
        elem     <= (elem == ADDR_W'(MASK_SIZE - 1)) ? '0 : elem + 1'b1;
      end
    end
  end

  // Every tensor holds exactly MASK_SIZE elements.
  always_ff @(posedge clk) begin
    if (rst_n && fire) a_last_aligned: assert (in_last == (elem == ADDR_W'(MASK_SIZE - 1)));
  end
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
