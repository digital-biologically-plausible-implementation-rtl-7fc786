// threshold_memory: the separate memory holding the learned thresholds T_j of
// the output neurons (batch normalisation folded into one integer per
// neuron). DEPTH words of TW bits, written one word per clock through
// we/waddr/wdata, and read in parallel: every word is visible on thr at all
// times, since the M column neurons (parallel-to-sequential) or the N x M cell
// neurons (sequential-to-parallel) need their thresholds in the same cycle.
// Cleared to zero by reset.
//
// The paper says only that the threshold is "stored in a separate memory
// array"; the register-file form, the width and the parallel read are this
// design's choices. Word c*n + r holds the threshold of output neuron r of
// column c (see bnn_top).
module threshold_memory #(
  parameter int unsigned DEPTH = 96,
  parameter int unsigned TW    = 11,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [TW-1:0]         wdata,
  output logic [DEPTH-1:0][TW-1:0] thr
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      thr <= '0;
    end else if (we) begin
      thr[waddr] <= wdata;
    end
  end

  a_addr: assert property (@(posedge clk) disable iff (!rst_n)
    we |-> (32'(waddr) < DEPTH))
    else $error("threshold_memory: address out of range");

endmodule
