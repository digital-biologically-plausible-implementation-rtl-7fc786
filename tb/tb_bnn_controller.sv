// tb_bnn_controller: checks the sequencing cycle by cycle. After an accepted
// start in cycle s, reads must be issued in cycles s+1 .. s+n with rows 0..n-1
// (one per cycle), par_valid must mark rows 0..n-1 in cycles s+3 .. s+n+2,
// done must pulse in cycle s+n+2, busy must cover s+1 .. s+n+2, acc_clr must
// pulse in cycle s, and a start while busy or with n_steps = 0 is ignored.
module tb_bnn_controller;
  import bnn_pkg::*;
  localparam int N = 32;

  logic       clk = 0, rst_n, start;
  mode_e      mode_in, mode;
  logic [5:0] n_steps;
  logic       busy, rd_en, acc_clr, v1, par_valid, seq_valid, done;
  logic [4:0] row_addr, row1, par_row;
  int checks = 0, failures = 0;

  bnn_controller #(.NSZ(N)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .mode_in(mode_in), .n_steps(n_steps),
    .busy(busy), .mode(mode), .rd_en(rd_en), .row_addr(row_addr), .acc_clr(acc_clr),
    .row1(row1), .v1(v1), .par_valid(par_valid), .par_row(par_row),
    .seq_valid(seq_valid), .done(done));

  always #5 clk = ~clk;

  task automatic expect_bit(input logic got, input logic exp, input string what, input int cyc);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s at cycle %0d: %0b exp %0b", what, cyc, got, exp); end
  endtask

  task automatic run(input mode_e m, input int n);
    @(negedge clk);
    start = 1; mode_in = m; n_steps = 6'(n);
    #1 expect_bit(acc_clr, 1'b1, "acc_clr", 0);
    @(negedge clk);
    start = 1;   // held high: must be ignored while busy
    for (int cyc = 1; cyc <= n + 3; cyc++) begin
      #1;
      expect_bit(rd_en, (cyc >= 1 && cyc <= n), "rd_en", cyc);
      if (cyc >= 1 && cyc <= n) begin
        checks++; if (int'(row_addr) != cyc - 1) begin failures++; $display("FAIL row %0d at %0d", row_addr, cyc); end
      end
      expect_bit(par_valid, (m == MODE_PAR_TO_SEQ) && cyc >= 3 && cyc <= n + 2, "par_valid", cyc);
      if (par_valid) begin
        checks++; if (int'(par_row) != cyc - 3) begin failures++; $display("FAIL par_row %0d at %0d", par_row, cyc); end
      end
      expect_bit(done, cyc == n + 2, "done", cyc);
      expect_bit(seq_valid, (m == MODE_SEQ_TO_PAR) && cyc == n + 2, "seq_valid", cyc);
      expect_bit(busy, cyc <= n + 2, "busy", cyc);
      if (cyc == n + 2) start = 0;
      @(negedge clk);
    end
    start = 0;
  endtask

  initial begin
    rst_n = 0; start = 0; mode_in = MODE_PAR_TO_SEQ; n_steps = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(MODE_PAR_TO_SEQ, 5);
    run(MODE_SEQ_TO_PAR, 3);
    run(MODE_PAR_TO_SEQ, 32);
    run(MODE_SEQ_TO_PAR, 1);
    // n_steps = 0: ignored.
    @(negedge clk); start = 1; n_steps = 0;
    @(negedge clk); start = 0;
    expect_bit(busy, 1'b0, "busy after n_steps=0", 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
