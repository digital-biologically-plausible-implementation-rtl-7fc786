// tb_row_decoder: checks that every row address selects exactly its own word
// line, and that no line is selected while the decoder is disabled.
module tb_row_decoder;
  localparam int ROWS = 32;
  logic            en;
  logic [4:0]      addr;
  logic [ROWS-1:0] wl;
  int checks = 0, failures = 0;

  row_decoder #(.ROWS(ROWS)) dut (.en(en), .addr(addr), .wl(wl));

  initial begin
    for (int a = 0; a < ROWS; a++) begin
      en = 1'b1; addr = 5'(a);
      #1 checks++;
      if (wl !== (32'h1 << a)) begin failures++; $display("FAIL addr %0d wl=%h", a, wl); end
      en = 1'b0;
      #1 checks++;
      if (wl !== '0) begin failures++; $display("FAIL disabled addr %0d wl=%h", a, wl); end
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
