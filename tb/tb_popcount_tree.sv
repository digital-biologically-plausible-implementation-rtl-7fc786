// tb_popcount_tree: checks the column sum of N = 3 partial popcounts (each
// 0..32) against the plain sum, including the maximum 96, and that the tree
// reads zero while disabled.
module tb_popcount_tree;
  localparam int N = 3, PW = 6, SW = 8;
  logic                en;
  logic [N-1:0][PW-1:0] partial;
  logic [SW-1:0]       sum;
  int checks = 0, failures = 0;

  popcount_tree #(.N(N), .PW(PW), .SW(SW)) dut (.en(en), .partial(partial), .sum(sum));

  initial begin
    int exp;
    for (int k = 0; k < 1000; k++) begin
      exp = 0;
      for (int i = 0; i < N; i++) begin
        partial[i] = (k == 0) ? PW'(32) : PW'($urandom_range(0, 32));
        exp += int'(partial[i]);
      end
      en = 1'b1;
      #1 checks++;
      if (int'(sum) != exp) begin failures++; $display("FAIL sum=%0d exp=%0d", sum, exp); end
      en = 1'b0;
      #1 checks++;
      if (sum !== '0) begin failures++; $display("FAIL disabled sum=%0d", sum); end
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
