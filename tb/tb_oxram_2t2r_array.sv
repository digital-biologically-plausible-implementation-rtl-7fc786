// tb_oxram_2t2r_array: checks the behavioural 2T2R array model against a
// reference copy of every device: a fresh die reads pristine, SET/RESET do
// not change an unformed device, FORM/SET/RESET of one device change only that
// device, and a row read returns the whole selected row on both sides.
module tb_oxram_2t2r_array;
  import bnn_pkg::*;
  localparam int ROWS = 32, COLS = 32;

  logic                     clk = 0;
  logic [ROWS-1:0]          wl;
  logic [COLS-1:0]          col_sel;
  prog_op_e                 prog_op;
  side_e                    prog_side;
  logic [R_W-1:0]           prog_r;
  logic [COLS-1:0][R_W-1:0] r_bl, r_blb;

  logic [R_W-1:0] ref_r [2][ROWS][COLS];
  logic           ref_f [2][ROWS][COLS];
  int checks = 0, failures = 0;

  oxram_2t2r_array #(.ROWS(ROWS), .COLS(COLS)) dut (
    .clk(clk), .wl(wl), .col_sel(col_sel), .prog_op(prog_op),
    .prog_side(prog_side), .prog_r(prog_r), .r_bl(r_bl), .r_blb(r_blb));

  always #5 clk = ~clk;

  task automatic prog(input int r, input int c, input side_e s, input prog_op_e op, input logic [R_W-1:0] rv);
    @(negedge clk);
    wl = ROWS'(1) << r; col_sel = COLS'(1) << c;
    prog_op = op; prog_side = s; prog_r = rv;
    @(negedge clk);
    prog_op = PROG_NOP; wl = '0; col_sel = '0;
    if (op == PROG_FORM) begin ref_f[int'(s)][r][c] = 1'b1; ref_r[int'(s)][r][c] = rv; end
    else if (ref_f[int'(s)][r][c]) ref_r[int'(s)][r][c] = rv;
  endtask

  task automatic check_row(input int r);
    @(negedge clk);
    wl = ROWS'(1) << r; col_sel = '0; prog_op = PROG_NOP;
    #1;
    for (int c = 0; c < COLS; c++) begin
      logic [R_W-1:0] e0, e1;
      e0 = ref_f[0][r][c] ? ref_r[0][r][c] : R_PRISTINE;
      e1 = ref_f[1][r][c] ? ref_r[1][r][c] : R_PRISTINE;
      checks++;
      if (r_bl[c] !== e0 || r_blb[c] !== e1) begin
        failures++;
        $display("FAIL row %0d col %0d: %0d/%0d exp %0d/%0d", r, c, r_bl[c], r_blb[c], e0, e1);
      end
    end
    wl = '0;
  endtask

  initial begin
    wl = '0; col_sel = '0; prog_op = PROG_NOP; prog_side = SIDE_BL; prog_r = '0;
    for (int s = 0; s < 2; s++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin ref_f[s][r][c] = 0; ref_r[s][r][c] = 0; end
    // Fresh die.
    check_row(0); check_row(31);
    // SET on unformed device: no effect.
    prog(3, 4, SIDE_BL, PROG_SET, 8'd7);
    check_row(3);
    // Form rows 0..7 and program random states.
    for (int r = 0; r < 8; r++)
      for (int c = 0; c < COLS; c++) begin
        prog(r, c, SIDE_BL,  PROG_FORM, R_W'($urandom_range(2, 20)));
        prog(r, c, SIDE_BLB, PROG_FORM, R_W'($urandom_range(2, 20)));
      end
    for (int r = 0; r < 8; r++) check_row(r);
    for (int k = 0; k < 600; k++) begin
      int r, c;
      r = $urandom_range(0, 9); c = $urandom_range(0, COLS - 1);
      prog(r, c, side_e'($urandom_range(0, 1)),
           ($urandom_range(0, 1) != 0) ? PROG_SET : PROG_RESET, R_W'($urandom));
      if (k % 20 == 0) check_row(r);
    end
    for (int r = 0; r < 10; r++) check_row(r);
    // No word line: every column reads pristine.
    @(negedge clk); wl = '0; #1;
    checks++;
    for (int c = 0; c < COLS; c++)
      if (r_bl[c] !== R_PRISTINE || r_blb[c] !== R_PRISTINE) begin failures++; break; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
