// bnn_top: in-memory binarized neural network (BNN) layer engine.
//
// A matrix of N x M basic cells, each a kilobit (NSZ x NSZ pairs) differential
// resistive memory block whose sense amplifiers compute XNOR(weight, input),
// plus a popcount counter. Below each column of cells a popcount tree adds the
// partial counts of the column, and a neuron unit subtracts the threshold read
// from a separate threshold memory and keeps the sign. A controller reads one
// row of every block per clock cycle. Defaults N = M = 3, NSZ = 32 are the
// configuration drawn in the paper's architecture figure.
//
// Two configurations (mode, latched at start):
//   * MODE_PAR_TO_SEQ, up to NSZ*N inputs and NSZ*M outputs. Cell row i gets
//     inputs x_par[i] (NSZ bits), the same for every column. Row r of the
//     blocks in column j holds the weights of output neuron j*NSZ + r. Each
//     cycle one row is read and the M activations of neurons j*NSZ + r,
//     j = 0..M-1, come out on act_par with par_valid, par_row = r.
//     Threshold of neuron j*NSZ + r: threshold word j*NSZ + r.
//   * MODE_SEQ_TO_PAR, up to NSZ*NSZ inputs and N*M outputs. Every cell
//     computes one neuron. Inputs are streamed in chunks of NSZ bits on x_seq:
//     in a cycle with in_chunk_req = 1, x_seq must hold chunk in_chunk_idx,
//     whose weights are row in_chunk_idx of every block. With seq_valid the
//     activation of the neuron of cell (i, j) is on act_seq[i][j]. Its
//     threshold is word j*NSZ + i. The popcount trees are idle (gated).
// Timing: start (when busy = 0) -> one row per cycle for n_steps cycles ->
// each result two cycles after its read; done with the last result.
//
// While busy = 0 the host side reaches any one block, chosen by host_bi /
// host_bj, at row host_row and column host_col: program one device
// (prog_op, prog_side, prog_r), read the row with all inputs at +1
// (host_rd; the stored bit of column host_col is on rd_bit from the next
// cycle), or bypass the sense amplifiers and see the pair's resistances on
// meas_r_bl / meas_r_blb. Thresholds are written through thr_we at any time
// outside a run.
//
// Programming voltages and the external measurement instruments are outside
// this design; the prog_r and meas_* ports stand where they connect. The
// neuron-to-row mapping, the host ports and the pipeline are this design's
// choices; the paper gives the matrix of cells, the per-cycle row reads, the
// column popcount trees, the threshold subtraction and the two modes.
module bnn_top
  import bnn_pkg::*;
#(
  parameter int unsigned N   = 3,   // rows of basic cells
  parameter int unsigned M   = 3,   // columns of basic cells
  parameter int unsigned NSZ = 32,  // each memory block is NSZ x NSZ pairs
  parameter int unsigned RAW = $clog2(NSZ),
  parameter int unsigned SW  = $clog2(NSZ + 1),
  parameter int unsigned NAW = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned MAW = (M > 1) ? $clog2(M) : 1,
  parameter int unsigned TDEPTH = NSZ * M,
  parameter int unsigned TAW = $clog2(TDEPTH),
  parameter int unsigned TW  = $clog2(NSZ * ((NSZ > N) ? NSZ : N) + 2)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // layer computation
  input  logic                     start,
  input  mode_e                    mode,
  input  logic [SW-1:0]            n_steps,
  input  logic [N-1:0][NSZ-1:0]    x_par,
  input  logic [NSZ-1:0]           x_seq,
  output logic                     in_chunk_req,
  output logic [RAW-1:0]           in_chunk_idx,
  output logic                     busy,
  output logic                     done,
  output logic                     par_valid,
  output logic [RAW-1:0]           par_row,
  output logic [M-1:0]             act_par,
  output logic                     seq_valid,
  output logic [N-1:0][M-1:0]      act_seq,
  // threshold memory
  input  logic                     thr_we,
  input  logic [TAW-1:0]           thr_waddr,
  input  logic [TW-1:0]            thr_wdata,
  // host access to one memory block
  input  logic [NAW-1:0]           host_bi,
  input  logic [MAW-1:0]           host_bj,
  input  logic [RAW-1:0]           host_row,
  input  logic [RAW-1:0]           host_col,
  input  logic                     host_rd,
  input  prog_op_e                 prog_op,
  input  side_e                    prog_side,
  input  logic [R_W-1:0]           prog_r,
  input  logic                     bypass,
  output logic                     rd_bit,
  output logic [R_W-1:0]           meas_r_bl,
  output logic [R_W-1:0]           meas_r_blb
);

  localparam int unsigned PW    = $clog2(NSZ + 1);
  localparam int unsigned TSW   = PW + $clog2(N + 1);

  initial assert (N <= NSZ) else $error("bnn_top: N must not exceed NSZ (threshold map)");

  // Controller
  mode_e          cur_mode;
  logic           ctl_rd, acc_clr, v1;
  logic [RAW-1:0] ctl_row, row1;

  bnn_controller #(.NSZ(NSZ)) u_ctl (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .mode_in   (mode),
    .n_steps   (n_steps),
    .busy      (busy),
    .mode      (cur_mode),
    .rd_en     (ctl_rd),
    .row_addr  (ctl_row),
    .acc_clr   (acc_clr),
    .row1      (row1),
    .v1        (v1),
    .par_valid (par_valid),
    .par_row   (par_row),
    .seq_valid (seq_valid),
    .done      (done)
  );

  assign in_chunk_req = ctl_rd && (cur_mode == MODE_SEQ_TO_PAR);
  assign in_chunk_idx = ctl_row;

  // Threshold memory
  logic [TDEPTH-1:0][TW-1:0] thr;

  threshold_memory #(.DEPTH(TDEPTH), .TW(TW)) u_thr (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (thr_we && !busy),
    .waddr (thr_waddr),
    .wdata (thr_wdata),
    .thr   (thr)
  );

  // Matrix of basic cells
  logic [N-1:0][M-1:0]            cell_rd_bit;
  logic [N-1:0][M-1:0][R_W-1:0]   cell_meas_bl, cell_meas_blb;
  logic [M-1:0][N-1:0][PW-1:0]    col_partial;
  logic                           seq_mode;

  assign seq_mode = (cur_mode == MODE_SEQ_TO_PAR);

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < M; j++) begin : g_col
      logic           sel;
      logic           c_rd;
      logic [RAW-1:0] c_row;
      logic [NSZ-1:0] c_x;
      prog_op_e       c_prog;

      assign sel    = !busy && (32'(host_bi) == i) && (32'(host_bj) == j);
      assign c_rd   = busy ? ctl_rd : (sel && host_rd);
      assign c_row  = busy ? ctl_row : host_row;
      assign c_x    = !busy ? '1 : (seq_mode ? x_seq : x_par[i]);
      assign c_prog = sel ? prog_op : PROG_NOP;

      basic_cell #(.NSZ(NSZ), .TW(TW)) u_cell (
        .clk        (clk),
        .rst_n      (rst_n),
        .rd_en      (c_rd),
        .row_addr   (c_row),
        .col_addr   (host_col),
        .x          (c_x),
        .prog_op    (c_prog),
        .prog_side  (prog_side),
        .prog_r     (prog_r),
        .bypass     (sel && bypass),
        .rd_bit     (cell_rd_bit[i][j]),
        .meas_r_bl  (cell_meas_bl[i][j]),
        .meas_r_blb (cell_meas_blb[i][j]),
        .seq_mode   (seq_mode),
        .acc_clr    (acc_clr),
        .thr        (thr[j*NSZ + i]),
        .row_valid  (),
        .partial    (col_partial[j][i]),
        .acc        (),
        .act_seq    (act_seq[i][j])
      );
    end
  end

  // Column popcount trees and neuron units (parallel-to-sequential).
  logic [M-1:0] act_par_d;

  for (genvar j = 0; j < M; j++) begin : g_colsum
    logic [TSW-1:0] col_sum;

    popcount_tree #(.N(N), .PW(PW), .SW(TSW)) u_tree (
      .en      (!seq_mode),
      .partial (col_partial[j]),
      .sum     (col_sum)
    );

    sign_activation #(.PW(TSW), .TW(TW)) u_neuron (
      .pop (col_sum),
      .thr (thr[j*NSZ + 32'(row1)]),
      .act (act_par_d[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  act_par <= '0;
    else if (v1 && !seq_mode)    act_par <= act_par_d;
  end

  // Host read-back from the selected block.
  always_comb begin
    rd_bit     = 1'b0;
    meas_r_bl  = '0;
    meas_r_blb = '0;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        if ((32'(host_bi) == i) && (32'(host_bj) == j)) begin
          rd_bit     = cell_rd_bit[i][j];
          meas_r_bl  = cell_meas_bl[i][j];
          meas_r_blb = cell_meas_blb[i][j];
        end
  end

  a_no_prog_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> (prog_op == PROG_NOP))
    else $error("bnn_top: programming during a run");

endmodule
