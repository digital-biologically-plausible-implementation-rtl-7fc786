// tb_bnn_top: end-to-end test of the whole BNN array at its default size
// (3 x 3 basic cells of 32 x 32 pairs, no parameter overrides).
//
// 1. Forms and programs all 9216 pairs with random weights; pair resistances
//    are drawn from LRS and HRS ranges, and about 1 % of pairs get an HRS
//    device that is not more resistive than its LRS partner, i.e. a bit
//    error. The reference keeps the bit the sense amplifier will really read
//    (R_BL > R_BLb) as well as the intended weight.
// 2. Host access: single-bit reads and bypass resistance measurements of
//    random pairs in random blocks.
// 3. Parallel-to-sequential layer: 96 inputs, 96 outputs, 32 rows read one per
//    cycle; every activation is compared with sign(popcount - T), and the
//    cycle count from start to done must be 32 + 3.
// 4. Sequential-to-parallel layer: 1024 inputs streamed in 32 chunks, 9
//    outputs, compared the same way.
// Counted mechanisms (each must occur): both configurations, one activation
// per column per cycle, programming (form/SET/RESET), single-bit read, bypass
// measurement, a bit error seen at the read output (the first pairs given
// overlapping resistances are read back), popcount tree gated, and a start
// ignored while busy. Bit errors that flip an activation are reported.
module tb_bnn_top;
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

  // Reference state.
  logic [R_W-1:0] rb  [N][M][NSZ][NSZ];
  logic [R_W-1:0] rbb [N][M][NSZ][NSZ];
  logic           wint[N][M][NSZ][NSZ];   // intended weight
  logic [TW-1:0]  thr_ref [NSZ*M];
  logic [NSZ-1:0] chunks [NSZ];

  int checks = 0, failures = 0;
  int cnt_prog = 0, cnt_read = 0, cnt_bypass = 0, cnt_par_rows = 0, cnt_seq_runs = 0;
  int cnt_err_pairs = 0, cnt_err_flips = 0, cnt_tree_gated = 0, cnt_start_ignored = 0;
  int cycle = 0, cnt_err_seen = 0;
  int err_loc [$];

  always @(posedge clk) cycle++;

  function automatic logic wread(int i, int j, int r, int c);
    return rb[i][j][r][c] > rbb[i][j][r][c];
  endfunction

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic prog(input int i, input int j, input int r, input int c, input side_e s,
                      input prog_op_e op, input logic [R_W-1:0] rv);
    @(negedge clk);
    host_bi = 2'(i); host_bj = 2'(j); host_row = 5'(r); host_col = 5'(c);
    prog_op = op; prog_side = s; prog_r = rv;
    @(negedge clk);
    prog_op = PROG_NOP;
    cnt_prog++;
  endtask

  task automatic write_thr(input int a, input int v);
    @(negedge clk);
    thr_we = 1; thr_waddr = 7'(a); thr_wdata = TW'(v); thr_ref[a] = TW'(v);
    @(negedge clk);
    thr_we = 0;
  endtask

  // Drive x_seq from the chunk the array asks for.
  always_comb x_seq = in_chunk_req ? chunks[in_chunk_idx] : '0;

  initial begin
    rst_n = 0; start = 0; mode = MODE_PAR_TO_SEQ; n_steps = 0; x_par = '0;
    thr_we = 0; thr_waddr = 0; thr_wdata = 0; host_bi = 0; host_bj = 0;
    host_row = 0; host_col = 0; host_rd = 0; bypass = 0;
    prog_op = PROG_NOP; prog_side = SIDE_BL; prog_r = '0;
    for (int k = 0; k < NSZ; k++) chunks[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. Programming of every device.
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++)
        for (int r = 0; r < NSZ; r++)
          for (int c = 0; c < NSZ; c++) begin
            logic w;
            logic [R_W-1:0] lrs, hrs;
            w   = 1'($urandom);
            lrs = R_W'($urandom_range(3, 20));
            hrs = R_W'($urandom_range(40, 200));
            if ($urandom_range(0, 99) == 0) hrs = R_W'($urandom_range(2, 20));
            if (hrs == lrs) hrs = hrs - 1;
            wint[i][j][r][c] = w;
            rb[i][j][r][c]   = w ? hrs : lrs;
            rbb[i][j][r][c]  = w ? lrs : hrs;
            if (wread(i, j, r, c) != w) begin
              cnt_err_pairs++;
              err_loc.push_back(((i * M + j) * NSZ + r) * NSZ + c);
            end
            prog(i, j, r, c, SIDE_BL,  PROG_FORM, 8'd10);
            prog(i, j, r, c, SIDE_BLB, PROG_FORM, 8'd10);
            prog(i, j, r, c, SIDE_BL,  w ? PROG_RESET : PROG_SET, rb[i][j][r][c]);
            prog(i, j, r, c, SIDE_BLB, w ? PROG_SET : PROG_RESET, rbb[i][j][r][c]);
          end
    $display("programmed %0d devices, %0d pairs with a bit error", cnt_prog / 2, cnt_err_pairs);

    // 2. Host single-bit reads and bypass measurements.
    for (int k = 0; k < 60; k++) begin
      int i, j, r, c;
      i = $urandom_range(0, N - 1); j = $urandom_range(0, M - 1);
      r = $urandom_range(0, NSZ - 1); c = $urandom_range(0, NSZ - 1);
      if (k < err_loc.size() && k < 10) begin
        // a pair programmed with overlapping resistances
        c = err_loc[k] % NSZ;
        r = (err_loc[k] / NSZ) % NSZ;
        j = (err_loc[k] / (NSZ * NSZ)) % M;
        i = err_loc[k] / (NSZ * NSZ * M);
      end
      @(negedge clk);
      host_bi = 2'(i); host_bj = 2'(j); host_row = 5'(r); host_col = 5'(c); host_rd = 1;
      @(negedge clk); host_rd = 0;
      check(rd_bit == wread(i, j, r, c), $sformatf("rd_bit blk %0d,%0d row %0d col %0d", i, j, r, c));
      cnt_read++;
      if (rd_bit != wint[i][j][r][c]) cnt_err_seen++;
      bypass = 1; #1;
      check(meas_r_bl == rb[i][j][r][c] && meas_r_blb == rbb[i][j][r][c], "bypass measurement");
      cnt_bypass++;
      @(negedge clk); bypass = 0;
    end

    // 3. Parallel-to-sequential layer, 96 -> 96.
    for (int a = 0; a < NSZ * M; a++) write_thr(a, $urandom_range(40, 56));
    for (int i = 0; i < N; i++) x_par[i] = $urandom;
    begin
      int t0, got_rows;
      @(negedge clk); start = 1; mode = MODE_PAR_TO_SEQ; n_steps = 6'(NSZ); t0 = cycle;
      @(negedge clk);
      // start stays high for a while: must be ignored while busy.
      got_rows = 0;
      while (!done) begin
        if (start && busy) cnt_start_ignored++;
        if (cycle - t0 > 4) start = 0;
        if (par_valid) begin
          check(int'(par_row) == got_rows, $sformatf("par_row %0d exp %0d", par_row, got_rows));
          for (int j = 0; j < M; j++) begin
            int pop, pop_int;
            logic e, e_int;
            pop = 0; pop_int = 0;
            for (int i = 0; i < N; i++)
              for (int c = 0; c < NSZ; c++) begin
                pop     += (x_par[i][c] == wread(i, j, par_row, c)) ? 1 : 0;
                pop_int += (x_par[i][c] == wint[i][j][par_row][c]) ? 1 : 0;
              end
            e     = pop     >= int'(thr_ref[j*NSZ + par_row]);
            e_int = pop_int >= int'(thr_ref[j*NSZ + par_row]);
            if (e != e_int) cnt_err_flips++;
            check(act_par[j] == e, $sformatf("act_par row %0d col %0d: %0b exp %0b (pop %0d)", par_row, j, act_par[j], e, pop));
          end
          got_rows++;
          cnt_par_rows++;
        end
        @(negedge clk);
      end
      check(par_valid && got_rows == NSZ - 1, "last row arrives with done");
      if (par_valid) begin got_rows++; cnt_par_rows++; end
      check(cycle - t0 == NSZ + 2, $sformatf("parallel layer took %0d cycles, exp %0d", cycle - t0, NSZ + 2));
      start = 0;
      @(negedge clk);
    end

    // 4. Sequential-to-parallel layer, 1024 -> 9.
    for (int k = 0; k < NSZ; k++) chunks[k] = $urandom;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < M; j++) write_thr(j*NSZ + i, $urandom_range(500, 524));
    begin
      int t0;
      @(negedge clk); start = 1; mode = MODE_SEQ_TO_PAR; n_steps = 6'(NSZ); t0 = cycle;
      @(negedge clk); start = 0;
      while (!done) begin
        // the popcount trees must be gated in this configuration
        if (in_chunk_req && dut.g_colsum[0].col_sum == '0) cnt_tree_gated++;
        @(negedge clk);
      end
      check(seq_valid, "seq_valid with done");
      check(cycle - t0 == NSZ + 2, $sformatf("sequential layer took %0d cycles", cycle - t0));
      for (int i = 0; i < N; i++)
        for (int j = 0; j < M; j++) begin
          int pop, pop_int;
          logic e, e_int;
          pop = 0; pop_int = 0;
          for (int k = 0; k < NSZ; k++)
            for (int c = 0; c < NSZ; c++) begin
              pop     += (chunks[k][c] == wread(i, j, k, c)) ? 1 : 0;
              pop_int += (chunks[k][c] == wint[i][j][k][c]) ? 1 : 0;
            end
          e     = pop     >= int'(thr_ref[j*NSZ + i]);
          e_int = pop_int >= int'(thr_ref[j*NSZ + i]);
          if (e != e_int) cnt_err_flips++;
          check(act_seq[i][j] == e, $sformatf("act_seq %0d,%0d: %0b exp %0b (pop %0d thr %0d)", i, j, act_seq[i][j], e, pop, thr_ref[j*NSZ+i]));
        end
      cnt_seq_runs++;
      @(negedge clk);
    end

    // Mechanism coverage.
    $display("mechanisms: prog=%0d read=%0d bypass=%0d par_rows=%0d seq_runs=%0d err_pairs=%0d err_seen=%0d err_flips=%0d tree_gated=%0d start_ignored=%0d",
             cnt_prog, cnt_read, cnt_bypass, cnt_par_rows, cnt_seq_runs, cnt_err_pairs,
             cnt_err_seen, cnt_err_flips, cnt_tree_gated, cnt_start_ignored);
    check(cnt_prog > 0, "programming happened");
    check(cnt_read > 0, "single-bit read happened");
    check(cnt_bypass > 0, "bypass measurement happened");
    check(cnt_par_rows == NSZ, "all parallel rows seen");
    check(cnt_seq_runs > 0, "sequential run happened");
    check(cnt_err_pairs > 0, "bit errors were programmed");
    check(cnt_err_seen > 0, "a bit error was seen at the read output");
    check(cnt_tree_gated > 0, "popcount tree gated");
    check(cnt_start_ignored > 0, "start ignored while busy");
    if (cnt_err_flips == 0) $display("note: no bit error changed an activation in this run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
