// tb_memory_block: end-to-end test of one kilobit in-memory computing block.
// It forms and programs all 1024 pairs with random weights (resistances drawn
// in LRS and HRS ranges, a few pairs given overlapping resistances to create
// bit errors), then checks XNOR row reads against a reference computed from
// the programmed resistances, the one-cycle read latency (row_valid), the
// single-bit read output, and the PCSA bypass measurement.
module tb_memory_block;
  import bnn_pkg::*;
  localparam int N = 32;

  logic           clk = 0, rst_n, rd_en, bypass;
  logic [4:0]     row_addr, col_addr;
  logic [N-1:0]   x, xnor_q;
  prog_op_e       prog_op;
  side_e          prog_side;
  logic [R_W-1:0] prog_r, meas_r_bl, meas_r_blb;
  logic           row_valid, rd_bit;

  logic [R_W-1:0] rb [N][N], rbb [N][N];
  int checks = 0, failures = 0, n_err_pairs = 0;

  memory_block #(.ROWS(N), .COLS(N)) dut (
    .clk(clk), .rst_n(rst_n), .rd_en(rd_en), .row_addr(row_addr), .col_addr(col_addr),
    .x(x), .prog_op(prog_op), .prog_side(prog_side), .prog_r(prog_r), .bypass(bypass),
    .xnor_q(xnor_q), .row_valid(row_valid), .rd_bit(rd_bit),
    .meas_r_bl(meas_r_bl), .meas_r_blb(meas_r_blb));

  always #5 clk = ~clk;

  task automatic prog(input int r, input int c, input side_e s, input prog_op_e op, input logic [R_W-1:0] rv);
    @(negedge clk);
    row_addr = 5'(r); col_addr = 5'(c); prog_op = op; prog_side = s; prog_r = rv;
    @(negedge clk);
    prog_op = PROG_NOP;
  endtask

  function automatic logic wbit(int r, int c);
    return rb[r][c] > rbb[r][c];
  endfunction

  initial begin
    rst_n = 0; rd_en = 0; bypass = 0; row_addr = 0; col_addr = 0; x = '0;
    prog_op = PROG_NOP; prog_side = SIDE_BL; prog_r = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        logic w;
        logic [R_W-1:0] lrs, hrs;
        w   = 1'($urandom);
        lrs = R_W'($urandom_range(3, 20));
        hrs = R_W'($urandom_range(40, 200));
        if ($urandom_range(0, 99) == 0) begin hrs = R_W'($urandom_range(2, 25)); end
        rb[r][c]  = w ? hrs : lrs;
        rbb[r][c] = w ? lrs : hrs;
        if (rb[r][c] == rbb[r][c]) rbb[r][c] = rbb[r][c] + 1;
        if (wbit(r, c) != w) n_err_pairs++;
        prog(r, c, SIDE_BL,  PROG_FORM, 8'd10);
        prog(r, c, SIDE_BLB, PROG_FORM, 8'd10);
        prog(r, c, SIDE_BL,  w ? PROG_RESET : PROG_SET, rb[r][c]);
        prog(r, c, SIDE_BLB, w ? PROG_SET : PROG_RESET, rbb[r][c]);
      end
    $display("pairs with a bit error: %0d", n_err_pairs);
    // XNOR row reads, back to back.
    for (int k = 0; k < 200; k++) begin
      int r;
      logic [N-1:0] xs, exp;
      r = $urandom_range(0, N - 1);
      xs = $urandom;
      @(negedge clk);
      rd_en = 1; row_addr = 5'(r); x = xs;
      for (int c = 0; c < N; c++) exp[c] = ~(xs[c] ^ wbit(r, c));
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (!row_valid || xnor_q !== exp) begin
        failures++; $display("FAIL row %0d valid=%0b q=%h exp=%h", r, row_valid, xnor_q, exp);
      end
      col_addr = 5'($urandom_range(0, N - 1));
      #1 checks++;
      if (rd_bit !== exp[col_addr]) begin failures++; $display("FAIL rd_bit col %0d", col_addr); end
      @(negedge clk);
      checks++;
      if (row_valid) begin failures++; $display("FAIL row_valid held"); end
    end
    // Bypass: direct resistance of one pair, no sensing.
    for (int k = 0; k < 50; k++) begin
      int r, c;
      r = $urandom_range(0, N - 1); c = $urandom_range(0, N - 1);
      @(negedge clk);
      bypass = 1; row_addr = 5'(r); col_addr = 5'(c);
      #1 checks++;
      if (meas_r_bl !== rb[r][c] || meas_r_blb !== rbb[r][c]) begin
        failures++; $display("FAIL bypass %0d,%0d: %0d/%0d exp %0d/%0d", r, c, meas_r_bl, meas_r_blb, rb[r][c], rbb[r][c]);
      end
      @(negedge clk); bypass = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
