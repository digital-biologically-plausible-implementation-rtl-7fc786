// tb_basic_cell: checks one basic cell. It programs the kilobit block with
// random weights, then (1) reads rows with random inputs and checks the
// partial popcount one cycle later, and (2) runs the sequential loop: all 32
// rows are read against 32 input chunks, and the accumulated popcount and the
// activation sign(acc - T) are compared with a reference, for thresholds
// below, at and above the count.
module tb_basic_cell;
  import bnn_pkg::*;
  localparam int N = 32, TW = 11;

  logic           clk = 0, rst_n, rd_en, bypass, seq_mode, acc_clr;
  logic [4:0]     row_addr, col_addr;
  logic [N-1:0]   x;
  prog_op_e       prog_op;
  side_e          prog_side;
  logic [R_W-1:0] prog_r, meas_r_bl, meas_r_blb;
  logic           rd_bit, row_valid, act_seq;
  logic [TW-1:0]  thr;
  logic [5:0]     partial;
  logic [10:0]    acc;

  logic w [N][N];
  int checks = 0, failures = 0;

  basic_cell #(.NSZ(N), .TW(TW)) dut (
    .clk(clk), .rst_n(rst_n), .rd_en(rd_en), .row_addr(row_addr), .col_addr(col_addr),
    .x(x), .prog_op(prog_op), .prog_side(prog_side), .prog_r(prog_r), .bypass(bypass),
    .rd_bit(rd_bit), .meas_r_bl(meas_r_bl), .meas_r_blb(meas_r_blb),
    .seq_mode(seq_mode), .acc_clr(acc_clr), .thr(thr),
    .row_valid(row_valid), .partial(partial), .acc(acc), .act_seq(act_seq));

  always #5 clk = ~clk;

  task automatic prog(input int r, input int c, input side_e s, input prog_op_e op, input logic [R_W-1:0] rv);
    @(negedge clk);
    row_addr = 5'(r); col_addr = 5'(c); prog_op = op; prog_side = s; prog_r = rv;
    @(negedge clk);
    prog_op = PROG_NOP;
  endtask

  function automatic int xnor_count(int r, logic [N-1:0] xs);
    int n = 0;
    for (int c = 0; c < N; c++) n += (xs[c] == w[r][c]) ? 1 : 0;
    return n;
  endfunction

  initial begin
    rst_n = 0; rd_en = 0; bypass = 0; seq_mode = 0; acc_clr = 0; thr = '0;
    row_addr = 0; col_addr = 0; x = '0; prog_op = PROG_NOP; prog_side = SIDE_BL; prog_r = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        w[r][c] = 1'($urandom);
        prog(r, c, SIDE_BL,  PROG_FORM, 8'd10);
        prog(r, c, SIDE_BLB, PROG_FORM, 8'd10);
        prog(r, c, SIDE_BL,  w[r][c] ? PROG_RESET : PROG_SET, w[r][c] ? 8'd120 : 8'd8);
        prog(r, c, SIDE_BLB, w[r][c] ? PROG_SET : PROG_RESET, w[r][c] ? 8'd8 : 8'd120);
      end
    // (1) partial popcount per row.
    for (int k = 0; k < 100; k++) begin
      int r;
      logic [N-1:0] xs;
      r = $urandom_range(0, N - 1);
      xs = (k == 0) ? '1 : $urandom;
      if (k == 1) begin r = 0; for (int c = 0; c < N; c++) xs[c] = w[0][c]; end
      @(negedge clk); rd_en = 1; row_addr = 5'(r); x = xs;
      @(negedge clk); rd_en = 0;
      checks++;
      if (!row_valid || int'(partial) != xnor_count(r, xs)) begin
        failures++; $display("FAIL partial row %0d: %0d exp %0d", r, partial, xnor_count(r, xs));
      end
    end
    // (2) sequential loop over 32 chunks, three thresholds.
    for (int t = 0; t < 3; t++) begin
      int expsum;
      logic [N-1:0] chunk [N];
      expsum = 0;
      for (int k = 0; k < N; k++) begin chunk[k] = $urandom; expsum += xnor_count(k, chunk[k]); end
      seq_mode = 1;
      @(negedge clk); acc_clr = 1;
      @(negedge clk); acc_clr = 0;
      for (int k = 0; k < N; k++) begin
        rd_en = 1; row_addr = 5'(k); x = chunk[k];
        @(negedge clk);
      end
      rd_en = 0;
      @(negedge clk);
      thr = (t == 0) ? TW'(expsum) : (t == 1) ? TW'(expsum + 1) : TW'(expsum - 30);
      #1 checks++;
      if (int'(acc) != expsum || act_seq !== (expsum >= int'(thr))) begin
        failures++; $display("FAIL seq acc=%0d exp %0d thr=%0d act=%0b", acc, expsum, thr, act_seq);
      end
      seq_mode = 0;
    end
    // In the parallel configuration the accumulator stays put.
    @(negedge clk); acc_clr = 1; @(negedge clk); acc_clr = 0;
    rd_en = 1; row_addr = 0; x = '1; @(negedge clk); rd_en = 0; @(negedge clk);
    checks++;
    if (acc !== '0) begin failures++; $display("FAIL acc moved in parallel mode"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
