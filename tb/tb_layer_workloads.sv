// tb_layer_workloads: runs slices of the fully connected and convolutional
// layers evaluated for this architecture through the whole array (bnn_top at
// its default 3 x 3 cells of 32 x 32 pairs), in the sequential-to-parallel
// configuration, which takes up to 1024 inputs and 9 neurons per pass.
//
// Workloads:
//   * one complete inference of the MNIST-sized binarized MLP
//     784 -> 1024 -> 1024 -> 10 (784 = 28 x 28 pixels), layer after layer:
//     114 + 114 + 2 passes, the activations of each layer being the inputs
//     of the next;
//   * the ECG CNN first convolution: 12 channels x kernel 13 = 156 inputs,
//     64 filters, 8 passes, for one output position.
// Weights, inputs and thresholds are random (no trained network or dataset
// is available here); thresholds are drawn around half the input count so
// both signs occur. Each pass programs the rows it uses (SET/RESET of both
// devices of every pair), writes the thresholds, streams the inputs and
// checks all activations against sign(popcount - T) computed on the
// unpadded layer. The weights of a pass are reprogrammed for the next one,
// as a 9,216-weight array must do for larger layers.
//
// Padding: a layer whose input count is not a multiple of 32 leaves unused
// positions in its last chunk. They get input +1 and weights alternating
// +1/-1, so they add a known number of ones (the +1 weights), which is added
// to the threshold word. The number of cycles of every pass is checked
// (chunks + 2 from start to done).
module tb_layer_workloads;
  import bnn_pkg::*;
  localparam int N = 3, M = 3, NSZ = 32, TW = 11;

  logic                  clk = 0, rst_n, start;
  mode_e                 mode;
  logic [5:0]            n_steps;
  logic [N-1:0][NSZ-1:0] x_par;
  logic [NSZ-1:0]        x_seq;
  logic                  in_chunk_req, busy, done, par_valid, seq_valid;
  logic [4:0]            in_chunk_idx, par_row;
  logic [M-1:0]          act_par;
  logic [N-1:0][M-1:0]   act_seq;
  logic                  thr_we;
  logic [6:0]            thr_waddr;
  logic [TW-1:0]         thr_wdata;
  logic [1:0]            host_bi, host_bj;
  logic [4:0]            host_row, host_col;
  logic                  host_rd, bypass, rd_bit;
  prog_op_e              prog_op;
  side_e                 prog_side;
  logic [R_W-1:0]        prog_r, meas_r_bl, meas_r_blb;

  bnn_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .mode(mode), .n_steps(n_steps),
    .x_par(x_par), .x_seq(x_seq), .in_chunk_req(in_chunk_req), .in_chunk_idx(in_chunk_idx),
    .busy(busy), .done(done), .par_valid(par_valid), .par_row(par_row), .act_par(act_par),
    .seq_valid(seq_valid), .act_seq(act_seq),
    .thr_we(thr_we), .thr_waddr(thr_waddr), .thr_wdata(thr_wdata),
    .host_bi(host_bi), .host_bj(host_bj), .host_row(host_row), .host_col(host_col),
    .host_rd(host_rd), .prog_op(prog_op), .prog_side(prog_side), .prog_r(prog_r),
    .bypass(bypass), .rd_bit(rd_bit), .meas_r_bl(meas_r_bl), .meas_r_blb(meas_r_blb));

  always #5 clk = ~clk;

  logic [NSZ-1:0] chunks [NSZ];
  logic           wt [N][M][NSZ][NSZ];
  logic           layer_in  [NSZ*NSZ];
  logic           layer_out [NSZ*NSZ];
  int checks = 0, failures = 0, neurons_run = 0, cycle = 0;

  always @(posedge clk) cycle++;
  always_comb x_seq = in_chunk_req ? chunks[in_chunk_idx] : '0;

  task automatic prog(input int i, input int j, input int r, input int c, input side_e s,
                      input prog_op_e op, input logic [R_W-1:0] rv);
    host_bi = 2'(i); host_bj = 2'(j); host_row = 5'(r); host_col = 5'(c);
    prog_op = op; prog_side = s; prog_r = rv;
    @(negedge clk);
    prog_op = PROG_NOP;
  endtask

  // One pass: n_in inputs, n_neur (<= 9) neurons, all in cells 0..n_neur-1.
  task automatic run_pass(input string name, input int n_in, input int n_neur, input int base);
    int nch, t0, pad_ones [N][M], thr_l [N][M];
    nch = (n_in + NSZ - 1) / NSZ;
    // Inputs, with padding at +1.
    for (int p = 0; p < nch * NSZ; p++)
      chunks[p / NSZ][p % NSZ] = (p < n_in) ? layer_in[p] : 1'b1;
    // Weights and their programming.
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        pad_ones[i][j] = 0;
        for (int k = 0; k < nch; k++)
          for (int c = 0; c < NSZ; c++) begin
            int p;
            p = k * NSZ + c;
            wt[i][j][k][c] = (p < n_in) ? 1'($urandom) : ((p % 2) == 0);
            if (p >= n_in && wt[i][j][k][c]) pad_ones[i][j]++;
            prog(i, j, k, c, SIDE_BL,  wt[i][j][k][c] ? PROG_RESET : PROG_SET,
                 wt[i][j][k][c] ? 8'd120 : 8'd8);
            prog(i, j, k, c, SIDE_BLB, wt[i][j][k][c] ? PROG_SET : PROG_RESET,
                 wt[i][j][k][c] ? 8'd8 : 8'd120);
          end
      end
    // Thresholds (logical value + padding ones).
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) begin
        thr_l[i][j] = n_in / 2 + $urandom_range(0, 16) - 8;
        thr_we = 1; thr_waddr = 7'(j * NSZ + i); thr_wdata = TW'(thr_l[i][j] + pad_ones[i][j]);
        @(negedge clk);
        thr_we = 0;
      end
    // Run.
    start = 1; mode = MODE_SEQ_TO_PAR; n_steps = 6'(nch); t0 = cycle;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (!seq_valid || cycle - t0 != nch + 2) begin
      failures++; $display("FAIL %s: seq_valid=%0b cycles=%0d exp %0d", name, seq_valid, cycle - t0, nch + 2);
    end
    for (int n = 0; n < n_neur; n++) begin
      int i, j, pop;
      logic e;
      i = n / M; j = n % M;
      pop = 0;
      for (int p = 0; p < n_in; p++)
        pop += (chunks[p / NSZ][p % NSZ] == wt[i][j][p / NSZ][p % NSZ]) ? 1 : 0;
      e = (pop >= thr_l[i][j]);
      layer_out[base + n] = act_seq[i][j];
      checks++;
      if (act_seq[i][j] !== e) begin
        failures++; $display("FAIL %s neuron %0d: act %0b exp %0b (pop %0d thr %0d)", name, n, act_seq[i][j], e, pop, thr_l[i][j]);
      end
      neurons_run++;
    end
    @(negedge clk);
  endtask

  task automatic run_layer(input string name, input int n_in, input int n_out);
    int left, passes, ones;
    left = n_out; passes = 0; ones = 0;
    while (left > 0) begin
      run_pass(name, n_in, (left > N * M) ? N * M : left, n_out - left);
      left -= (left > N * M) ? N * M : left;
      passes++;
    end
    for (int n = 0; n < n_out; n++) begin
      layer_in[n] = layer_out[n];
      ones += layer_out[n] ? 1 : 0;
    end
    $display("%s: %0d inputs, %0d neurons in %0d passes, %0d activations at +1",
             name, n_in, n_out, passes, ones);
  endtask

  initial begin
    rst_n = 0; start = 0; mode = MODE_SEQ_TO_PAR; n_steps = 0; x_par = '0;
    thr_we = 0; thr_waddr = 0; thr_wdata = 0; host_bi = 0; host_bj = 0;
    host_row = 0; host_col = 0; host_rd = 0; bypass = 0;
    prog_op = PROG_NOP; prog_side = SIDE_BL; prog_r = '0;
    for (int k = 0; k < NSZ; k++) chunks[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Forming of every device, once.
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        for (int r = 0; r < NSZ; r++)
          for (int c = 0; c < NSZ; c++) begin
            prog(i, j, r, c, SIDE_BL,  PROG_FORM, 8'd10);
            prog(i, j, r, c, SIDE_BLB, PROG_FORM, 8'd10);
          end
    // MNIST-sized MLP, one random binarized 28 x 28 image.
    for (int p = 0; p < NSZ * NSZ; p++) layer_in[p] = 1'($urandom);
    run_layer("MNIST hidden layer 1", 784, 1024);
    run_layer("MNIST hidden layer 2", 1024, 1024);
    run_layer("MNIST output layer", 1024, 10);
    // ECG first convolution, one window of 12 channels x 13 samples.
    for (int p = 0; p < NSZ * NSZ; p++) layer_in[p] = 1'($urandom);
    run_layer("ECG convolution 1", 12 * 13, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
