// tb_column_decoder: drives random per-column words and checks the one-hot
// select and the multiplexed output for every address, enabled and disabled.
module tb_column_decoder;
  localparam int COLS = 32, W = 4;
  logic                   en;
  logic [4:0]             addr;
  logic [COLS-1:0][W-1:0] din;
  logic [COLS-1:0]        sel;
  logic [W-1:0]           dout;
  int checks = 0, failures = 0;

  column_decoder #(.COLS(COLS), .W(W)) dut (.en(en), .addr(addr), .din(din), .sel(sel), .dout(dout));

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int a = 0; a < COLS; a++) begin
        for (int c = 0; c < COLS; c++) din[c] = W'($urandom);
        en = 1'b1; addr = 5'(a);
        #1 checks++;
        if (sel !== (32'h1 << a) || dout !== din[a]) begin
          failures++; $display("FAIL addr %0d sel=%h dout=%h exp %h", a, sel, dout, din[a]);
        end
        en = 1'b0;
        #1 checks++;
        if (sel !== '0 || dout !== '0) begin failures++; $display("FAIL disabled"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
