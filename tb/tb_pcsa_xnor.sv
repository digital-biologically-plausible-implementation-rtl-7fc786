// tb_pcsa_xnor: self-checking test of the XNOR precharge sense amplifier
// model. Drives random resistance pairs, input bits and SEN phases and checks
// the outputs against an independent reference: precharge gives 1/1; sensing
// gives XNOR(x, stored bit), stored bit = 1 when R_BL > R_BLb, and 0 for a tie.
module tb_pcsa_xnor;
  import bnn_pkg::*;

  logic           sen, x, out, out_n;
  logic [R_W-1:0] r_bl, r_blb;
  int checks = 0, failures = 0;

  pcsa_xnor dut (.sen(sen), .x(x), .r_bl(r_bl), .r_blb(r_blb), .out(out), .out_n(out_n));

  task automatic check(input logic exp_out, input logic exp_n, input string what);
    checks++;
    if (out !== exp_out || out_n !== exp_n) begin
      failures++;
      $display("FAIL %s: sen=%0b x=%0b rbl=%0d rblb=%0d out=%0b/%0b exp=%0b/%0b",
               what, sen, x, r_bl, r_blb, out, out_n, exp_out, exp_n);
    end
  endtask

  initial begin
    logic w, e;
    for (int k = 0; k < 2000; k++) begin
      r_bl  = R_W'($urandom);
      r_blb = (k % 10 == 0) ? r_bl : R_W'($urandom);
      x     = 1'($urandom);
      sen   = 1'b0;
      #1 check(1'b1, 1'b1, "precharge");
      sen = 1'b1;
      #1;
      if (r_bl == r_blb) e = 1'b0;
      else begin
        w = (r_bl > r_blb);          // HRS on BL, LRS on BLb: a 1
        e = (x == w);                // XNOR
      end
      check(e, ~e, "sense");
    end
    // The four XNOR cases with clear resistance states (kilo-ohms).
    sen = 1'b1;
    r_bl = 8'd100; r_blb = 8'd5;  x = 1'b1; #1 check(1'b1, 1'b0, "w=1 x=1");
    x = 1'b0;                                 #1 check(1'b0, 1'b1, "w=1 x=0");
    r_bl = 8'd5;   r_blb = 8'd100; x = 1'b1; #1 check(1'b0, 1'b1, "w=0 x=1");
    x = 1'b0;                                 #1 check(1'b1, 1'b0, "w=0 x=0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
