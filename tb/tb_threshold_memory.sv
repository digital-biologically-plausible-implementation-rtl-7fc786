// tb_threshold_memory: checks reset to zero, single-word writes, that a write
// touches only its word, and the parallel read of all 96 words.
module tb_threshold_memory;
  localparam int DEPTH = 96, TW = 11;
  logic                    clk = 0, rst_n, we;
  logic [6:0]              waddr;
  logic [TW-1:0]           wdata;
  logic [DEPTH-1:0][TW-1:0] thr;
  logic [TW-1:0]           ref_mem [DEPTH];
  int checks = 0, failures = 0;

  threshold_memory #(.DEPTH(DEPTH), .TW(TW)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr), .wdata(wdata), .thr(thr));

  always #5 clk = ~clk;

  task automatic compare_all(input string what);
    for (int a = 0; a < DEPTH; a++) begin
      checks++;
      if (thr[a] !== ref_mem[a]) begin
        failures++; $display("FAIL %s word %0d = %0d exp %0d", what, a, thr[a], ref_mem[a]);
      end
    end
  endtask

  initial begin
    rst_n = 0; we = 0; waddr = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) ref_mem[a] = '0;
    @(negedge clk); compare_all("reset");
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      we = 1'b1; waddr = 7'($urandom_range(0, DEPTH - 1)); wdata = TW'($urandom);
      ref_mem[waddr] = wdata;
      @(negedge clk); we = 1'b0;
      if (k % 50 == 0) compare_all("write");
    end
    @(negedge clk); compare_all("final");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
