// tb_popcount: checks the cell counter on corner cases (all zeros, all ones,
// which needs the sixth bit) and on random 32-bit rows against $countones.
module tb_popcount;
  logic [31:0] bits;
  logic [5:0]  count;
  int checks = 0, failures = 0;

  popcount #(.W_IN(32)) dut (.bits(bits), .count(count));

  task automatic chk;
    #1 checks++;
    if (count !== 6'($countones(bits))) begin
      failures++; $display("FAIL bits=%h count=%0d", bits, count);
    end
  endtask

  initial begin
    bits = '0; chk();
    bits = '1; chk();
    for (int i = 0; i < 32; i++) begin bits = 32'h1 << i; chk(); end
    for (int k = 0; k < 1000; k++) begin bits = $urandom; chk(); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
