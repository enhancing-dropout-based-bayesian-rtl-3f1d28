// feature_cache: cache of the last non-Bayesian activation tensor, replayed
// once per Monte-Carlo round.
//
// With partial dropout only the layers after the dropout layer differ between
// MC samples, so the tensor entering the Bayesian part is computed once,
// stored here, and cloned. The cache has two phases:
//   FILL   - accepts FEAT_SIZE elements from the backbone, one per cycle;
//   REPLAY - sends the stored tensor N_ROUND times back to back ("concatenated
//            clones"), tagging each copy with its round number and the last
//            element of each copy with `out_last`.
// In every round the consumer (bayes_exit) hands the same element to all of its
// spatial MC engines at once; successive rounds are the temporal part of the
// mapping. After the last round the cache returns to FILL for the next input.
//
// Timing: FILL takes FEAT_SIZE cycles, REPLAY FEAT_SIZE * N_ROUND cycles when
// the consumer never stalls; the first element of round 0 is offered in the
// cycle after the last element is written. The read is asynchronous (register
// file / distributed RAM style).
//
// Caching and cloning the non-Bayesian result is the paper's; the two-phase
// (single buffer, no overlap of fill and replay) organisation is this design's.
module feature_cache
  import bnn_pkg::*;
#(
  parameter int unsigned FEAT_SIZE = 400,
  parameter int unsigned N_ROUND   = 1,
  localparam int unsigned ADDR_W  = (FEAT_SIZE > 1) ? $clog2(FEAT_SIZE) : 1,
  localparam int unsigned ROUND_W = (N_ROUND   > 1) ? $clog2(N_ROUND)   : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  data_t              in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output data_t              out_data,
  output logic               out_last,
  output logic [ROUND_W-1:0] out_round
);

  typedef enum logic {FILL, REPLAY} phase_e;

  data_t              mem [FEAT_SIZE];
  phase_e             phase;
  logic [ADDR_W-1:0]  wr_ptr, rd_ptr;
  logic [ROUND_W-1:0] round;
  logic               wr_last, rd_last;

  assign in_ready  = (phase == FILL);
  assign out_valid = (phase == REPLAY);
  assign out_data  = mem[rd_ptr];
  assign rd_last   = (rd_ptr == ADDR_W'(FEAT_SIZE - 1));
  assign wr_last   = (wr_ptr == ADDR_W'(FEAT_SIZE - 1));
  assign out_last  = rd_last;
  assign out_round = round;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phase  <= FILL;
      wr_ptr <= '0;
      rd_ptr <= '0;
      round  <= '0;
    end else begin
      unique case (phase)
        FILL: if (in_valid) begin
          wr_ptr <= wr_last ? '0 : wr_ptr + 1'b1;
          if (wr_last) begin
            phase  <= REPLAY;
            rd_ptr <= '0;
            round  <= '0;
          end
        end
        REPLAY: if (out_ready) begin
          rd_ptr <= rd_last ? '0 : rd_ptr + 1'b1;
          if (rd_last) begin
            if (round == ROUND_W'(N_ROUND - 1)) phase <= FILL;
            else                                round <= round + 1'b1;
          end
        end
        default: phase <= FILL;
      endcase
    end
  end

endmodule
