// bnn_controller: sequencer of the BNN array. After `start` it issues one row
// read per clock cycle, rows 0 .. n_steps-1, to all basic cells at once, and
// tracks the two-stage pipeline behind the reads.
//   * Parallel-to-sequential (mode = MODE_PAR_TO_SEQ): row r holds the weights
//     of output neuron r of every column, so each read yields M activations.
//     par_valid/par_row mark the cycle in which the activations of row r are
//     on the outputs.
//   * Sequential-to-parallel (mode = MODE_SEQ_TO_PAR): row k holds the weights
//     for input chunk k, which must be on the input bus in the cycle the row
//     is read (rd_en with row_addr = k). The cell accumulators are cleared in
//     the start cycle (acc_clr); seq_valid marks the cycle in which all N*M
//     activations are final.
// Timing: start accepted in cycle s (only when not busy) -> reads in cycles
// s+1 .. s+n_steps -> the result of the read in cycle t is valid in cycle
// t+2 -> done (one cycle) with the last result; busy from s through done.
// Rows are therefore processed at one per clock cycle, as in the paper. The
// handshake, the latency and n_steps are this design's choices; a start with
// n_steps = 0 or n_steps > NSZ is ignored.
module bnn_controller
  import bnn_pkg::*;
#(
  parameter int unsigned NSZ = 32,
  parameter int unsigned RAW = $clog2(NSZ),
  parameter int unsigned SW  = $clog2(NSZ + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  mode_e          mode_in,
  input  logic [SW-1:0]  n_steps,
  output logic           busy,
  output mode_e          mode,
  output logic           rd_en,
  output logic [RAW-1:0] row_addr,
  output logic           acc_clr,
  output logic [RAW-1:0] row1,       // row whose popcount is in stage 1
  output logic           v1,         // stage 1 valid
  output logic           par_valid,
  output logic [RAW-1:0] par_row,
  output logic           seq_valid,
  output logic           done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  state_e        state;
  logic [SW-1:0] steps;
  logic [RAW-1:0] idx;
  logic          last1, last2, v2;
  logic [RAW-1:0] row2;
  logic          accept;

  assign accept   = (state == S_IDLE) && start &&
                    (n_steps != '0) && (32'(n_steps) <= NSZ);
  assign acc_clr  = accept;
  assign rd_en    = (state == S_RUN);
  assign row_addr = idx;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      steps <= '0;
      idx   <= '0;
      mode  <= MODE_PAR_TO_SEQ;
    end else begin
      unique case (state)
        S_IDLE: if (accept) begin
          state <= S_RUN;
          steps <= n_steps;
          mode  <= mode_in;
          idx   <= '0;
        end
        S_RUN: begin
          if (SW'(idx) == steps - SW'(1)) state <= S_DRAIN;
          else                            idx   <= idx + RAW'(1);
        end
        S_DRAIN: if (done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Pipeline tracking: stage 1 = latched XNOR row, stage 2 = result.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; last1 <= 1'b0; last2 <= 1'b0;
      row1 <= '0; row2 <= '0;
    end else begin
      v1    <= rd_en;
      row1  <= idx;
      last1 <= rd_en && (SW'(idx) == steps - SW'(1));
      v2    <= v1;
      row2  <= row1;
      last2 <= last1;
    end
  end

  assign par_valid = v2 && (mode == MODE_PAR_TO_SEQ);
  assign par_row   = row2;
  assign done      = v2 && last2;
  assign seq_valid = done && (mode == MODE_SEQ_TO_PAR);

  a_row: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> (32'(idx) < NSZ))
    else $error("bnn_controller: row out of range");

endmodule
