// tb_array_characterisation: the array experiment behind the differential
// cell, run on one kilobit block (memory_block, default 32 x 32 pairs).
//
// The whole array is programmed 100 times, alternating between the two
// complementary checkerboard patterns. Each programming draws a fresh
// resistance for every device: LRS codes 5..37 kilo-ohms and HRS codes
// 15..195 kilo-ohms, each the sum of four uniform draws, so the two
// distributions overlap in their tails. These ranges are this testbench's
// own, not measured data. After each programming, every row is read through
// the sense amplifiers with all inputs at +1.
//
// Checks: every bit read equals the comparison of the two resistances that
// were actually programmed (independent reference). Counted: bit errors of
// the 2T2R read against the target pattern, and the errors that single
// devices compared with a fixed 25 kilo-ohm reference (a 1T1R read) would
// have made. The differential read must make fewer errors, and at least one
// single-device error must have occurred for the comparison to mean anything.
module tb_array_characterisation;
  import bnn_pkg::*;
  localparam int N = 32, PROGRAMMINGS = 100;
  localparam logic [R_W-1:0] R_REF = 8'd25;

  logic           clk = 0, rst_n, rd_en, bypass;
  logic [4:0]     row_addr, col_addr;
  logic [N-1:0]   x, xnor_q;
  prog_op_e       prog_op;
  side_e          prog_side;
  logic [R_W-1:0] prog_r, meas_r_bl, meas_r_blb;
  logic           row_valid, rd_bit;

  logic [R_W-1:0] rb [N][N], rbb [N][N];
  int checks = 0, failures = 0;
  longint err_2t2r = 0, err_1t1r = 0, bits_read = 0, devices_read = 0;

  memory_block #(.ROWS(N), .COLS(N)) dut (
    .clk(clk), .rst_n(rst_n), .rd_en(rd_en), .row_addr(row_addr), .col_addr(col_addr),
    .x(x), .prog_op(prog_op), .prog_side(prog_side), .prog_r(prog_r), .bypass(bypass),
    .xnor_q(xnor_q), .row_valid(row_valid), .rd_bit(rd_bit),
    .meas_r_bl(meas_r_bl), .meas_r_blb(meas_r_blb));

  always #5 clk = ~clk;

  function automatic logic [R_W-1:0] draw_lrs();
    int v = 5;
    for (int k = 0; k < 4; k++) v += $urandom_range(0, 8);
    return R_W'(v);
  endfunction

  function automatic logic [R_W-1:0] draw_hrs();
    int v = 15;
    for (int k = 0; k < 4; k++) v += $urandom_range(0, 45);
    return R_W'(v);
  endfunction

  task automatic prog(input int r, input int c, input side_e s, input prog_op_e op, input logic [R_W-1:0] rv);
    row_addr = 5'(r); col_addr = 5'(c); prog_op = op; prog_side = s; prog_r = rv;
    @(negedge clk);
    prog_op = PROG_NOP;
  endtask

  initial begin
    rst_n = 0; rd_en = 0; bypass = 0; row_addr = 0; col_addr = 0; x = '1;
    prog_op = PROG_NOP; prog_side = SIDE_BL; prog_r = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // One-time forming of all devices.
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        prog(r, c, SIDE_BL,  PROG_FORM, 8'd10);
        prog(r, c, SIDE_BLB, PROG_FORM, 8'd10);
      end
    for (int p = 0; p < PROGRAMMINGS; p++) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          logic w;
          w = ((r + c + p) % 2) != 0;          // checkerboard, complemented each time
          rb[r][c]  = w ? draw_hrs() : draw_lrs();
          rbb[r][c] = w ? draw_lrs() : draw_hrs();
          prog(r, c, SIDE_BL,  w ? PROG_RESET : PROG_SET, rb[r][c]);
          prog(r, c, SIDE_BLB, w ? PROG_SET : PROG_RESET, rbb[r][c]);
        end
      for (int r = 0; r < N; r++) begin
        rd_en = 1; row_addr = 5'(r); x = '1;
        @(negedge clk);
        rd_en = 0;
        for (int c = 0; c < N; c++) begin
          logic w, sensed;
          w = ((r + c + p) % 2) != 0;
          sensed = (rb[r][c] > rbb[r][c]);
          checks++;
          if (xnor_q[c] !== sensed) begin
            failures++;
            $display("FAIL prog %0d row %0d col %0d: read %0b, resistances %0d/%0d", p, r, c, xnor_q[c], rb[r][c], rbb[r][c]);
          end
          bits_read++;
          if (xnor_q[c] != w) err_2t2r++;
          devices_read += 2;
          if ((rb[r][c] > R_REF) != w) err_1t1r++;
          if ((rbb[r][c] > R_REF) != !w) err_1t1r++;
        end
      end
    end
    $display("2T2R bit errors: %0d of %0d bits; single-device (1T1R) errors: %0d of %0d devices",
             err_2t2r, bits_read, err_1t1r, devices_read);
    checks++;
    if (err_1t1r == 0) begin failures++; $display("FAIL no single-device error: distributions do not overlap"); end
    checks++;
    if (real'(err_2t2r) / real'(bits_read) >= real'(err_1t1r) / real'(devices_read)) begin
      failures++; $display("FAIL differential read not better than single-device read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
