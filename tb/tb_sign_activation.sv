// tb_sign_activation: checks A = sign(P - T) (1 for P >= T, 0 otherwise) on
// the boundary P = T, P = T - 1, the extremes, and random pairs.
module tb_sign_activation;
  localparam int PW = 11, TW = 11;
  logic [PW-1:0] pop;
  logic [TW-1:0] thr;
  logic          act;
  int checks = 0, failures = 0;

  sign_activation #(.PW(PW), .TW(TW)) dut (.pop(pop), .thr(thr), .act(act));

  task automatic chk;
    #1 checks++;
    if (act !== (int'(pop) >= int'(thr))) begin
      failures++; $display("FAIL pop=%0d thr=%0d act=%0b", pop, thr, act);
    end
  endtask

  initial begin
    pop = 0;    thr = 0;    chk();
    pop = 2047; thr = 2047; chk();
    pop = 0;    thr = 2047; chk();
    pop = 2047; thr = 0;    chk();
    for (int k = 0; k < 500; k++) begin
      thr = TW'($urandom_range(1, 2047));
      pop = PW'(thr); chk();
      pop = PW'(thr - 1); chk();
      pop = PW'($urandom); chk();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
