// mcd_layer: Monte-Carlo dropout layer, one activation per cycle.
//
// For each activation x of the incoming tensor the layer decides to keep or
// drop it by drawing a uniform random number u: if u > keep_rate the output is
// 0, otherwise it is x * keep_rate. keep_rate is a run-time input, held constant
// while a model runs; it is an unsigned Q0.16 fraction, and the product is
// truncated (arithmetic shift) back to the activation format.
//
// Granularity (parameter N_CH):
//   N_CH = 0  one draw per element;
//   N_CH > 0  one draw per channel. The tensor is taken to arrive channel
//             innermost (all N_CH channels of a pixel, then the next pixel),
//             as a channels-last layer stream delivers it. The first N_CH
//             elements of a tensor draw one number each and store the keep
//             bit of their channel; every later element of that channel
//             reuses the stored bit. The position restarts after `last`.
//
// Interface: valid/ready streams in and out, with a `last` flag marking the
// final element of a tensor, which passes through untouched. The output stage
// is one register: latency one cycle, one element per cycle when the consumer
// is ready (in_ready = !out_valid || out_ready).
//
// The compare-and-multiply rule is the paper's pseudocode line by line; it
// scales kept values by keep_rate (not by 1/keep_rate as "inverted dropout"
// would). The pseudocode draws per element (N_CH = 0, the default); the
// method's prose says MCD drops whole channels, which N_CH > 0 provides. The
// xorshift generator, the Q0.16 rate, the truncation, the channel-innermost
// order and the stream handshake are this design's choices.
module mcd_layer
  import bnn_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h2545_F491,
  parameter int unsigned N_CH = 0,
  localparam int unsigned CH_N = (N_CH > 0) ? N_CH : 1,
  localparam int unsigned CH_W = (CH_N > 1) ? $clog2(CH_N) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  rate_t keep_rate,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_data,
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data,
  output logic  out_last
);

  rate_t uniform_random;
  logic  fire;
  data_t scaled;
  logic signed [DATA_W+RATE_W:0] prod;

  logic [CH_W-1:0] ch;        // channel of the next element
  logic            first_px;  // next element lies in the tensor's first pixel
  logic [CH_N-1:0] keep_ch;   // stored keep bit per channel
  logic            drawn;     // keep bit from the current random number
  logic            draw;      // this element takes a new random number
  logic            keep;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign drawn    = !(uniform_random > keep_rate);
  assign draw     = (N_CH == 0) || first_px;
  assign keep     = draw ? drawn : keep_ch[ch];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ch       <= '0;
      first_px <= 1'b1;
      keep_ch  <= '0;
    end else if (fire) begin
      if (first_px) keep_ch[ch] <= drawn;
      if (in_last) begin
        ch       <= '0;
        first_px <= 1'b1;
      end else if (32'(ch) == CH_N - 1) begin
        ch       <= '0;
        first_px <= 1'b0;
      end else begin
        ch <= ch + 1'b1;
      end
    end
  end

  xorshift_rng #(.SEED(SEED)) u_rng (
    .clk  (clk),
    .rst_n(rst_n),
    .en   (fire && draw),
    .rnd  (uniform_random)
  );

  always_comb begin
    prod   = in_data * $signed({1'b0, keep_rate});
    scaled = data_t'(prod >>> RATE_W);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (fire) begin
        out_data <= keep ? scaled : data_t'(0);
        out_last <= in_last;
      end
    end
  end

  // An offered output must stay put until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
