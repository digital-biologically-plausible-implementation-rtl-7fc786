// basic_cell: the repeated cell of the BNN array. It holds one kilobit
// in-memory computing block (2T2R array with XNOR sense amplifiers) and the
// digital popcount logic next to it.
//
// Every read cycle the block senses one row of NSZ weights against NSZ input
// bits; one cycle later the latched XNOR row is counted by the cell's counter
// and appears on `partial`.
//   * Parallel-to-sequential configuration: `partial` leaves the cell and is
//     summed down its column by the popcount tree (outside the cell).
//   * Sequential-to-parallel configuration (seq_mode = 1): the cell computes a
//     whole neuron by itself. The partial count is looped back into an
//     accumulator (acc <= acc + partial on every valid row), the inputs being
//     presented NSZ at a time. Once all inputs have been presented, act_seq =
//     sign(acc - thr) is the neuron's activation. acc_clr empties the
//     accumulator before a new neuron.
// Timing: rd_en in cycle t -> partial valid in cycle t+1 (row_valid) ->
// acc updated at the end of t+1. The memory access ports (programming, single
// bit read, bypass measurement) pass through to the memory block.
//
// From the paper: block + counter per cell, the loop of the partial popcount
// in the sequential configuration, threshold subtraction and sign. The
// accumulator width (enough for NSZ*NSZ inputs), the clear pulse and the
// handshake are this design's choices.
module basic_cell
  import bnn_pkg::*;
#(
  parameter int unsigned NSZ   = 32,
  parameter int unsigned TW    = 11,
  parameter int unsigned RAW   = $clog2(NSZ),
  parameter int unsigned PW    = $clog2(NSZ + 1),
  parameter int unsigned ACC_W = $clog2(NSZ * NSZ + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // memory block access
  input  logic              rd_en,
  input  logic [RAW-1:0]    row_addr,
  input  logic [RAW-1:0]    col_addr,
  input  logic [NSZ-1:0]    x,
  input  prog_op_e          prog_op,
  input  side_e             prog_side,
  input  logic [R_W-1:0]    prog_r,
  input  logic              bypass,
  output logic              rd_bit,
  output logic [R_W-1:0]    meas_r_bl,
  output logic [R_W-1:0]    meas_r_blb,
  // neuron computation
  input  logic              seq_mode,
  input  logic              acc_clr,
  input  logic [TW-1:0]     thr,
  output logic              row_valid,
  output logic [PW-1:0]     partial,
  output logic [ACC_W-1:0]  acc,
  output logic              act_seq
);

  logic [NSZ-1:0] xnor_q;

  memory_block #(.ROWS(NSZ), .COLS(NSZ)) u_mem (
    .clk        (clk),
    .rst_n      (rst_n),
    .rd_en      (rd_en),
    .row_addr   (row_addr),
    .col_addr   (col_addr),
    .x          (x),
    .prog_op    (prog_op),
    .prog_side  (prog_side),
    .prog_r     (prog_r),
    .bypass     (bypass),
    .xnor_q     (xnor_q),
    .row_valid  (row_valid),
    .rd_bit     (rd_bit),
    .meas_r_bl  (meas_r_bl),
    .meas_r_blb (meas_r_blb)
  );

  popcount #(.W_IN(NSZ), .OW(PW)) u_pc (
    .bits  (xnor_q),
    .count (partial)
  );

  // Sequential loop of the partial popcount.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     acc <= '0;
    else if (acc_clr)               acc <= '0;
    else if (seq_mode && row_valid) acc <= acc + ACC_W'(partial);
  end

  sign_activation #(.PW(ACC_W), .TW(TW)) u_act (
    .pop (acc),
    .thr (thr),
    .act (act_seq)
  );

endmodule
