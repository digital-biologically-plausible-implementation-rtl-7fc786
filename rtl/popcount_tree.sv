// popcount_tree: the "popcount tree" that runs down one column of basic cells
// in the parallel-to-sequential configuration. It adds the N partial popcounts
// of the cells of the column, one after the other as the column is traversed
// (sum_k = sum_{k-1} + partial_k), and delivers the full POPCOUNT of an output
// neuron at the bottom of the column. Combinational.
//
// The paper says the tree is only activated in this configuration. Here, with
// en low, the adder inputs are held at zero (operand isolation), so the adder
// chain does not toggle and the sum reads zero. The ripple-chain form follows
// "successively adding" in the paper; widths are this design's.
module popcount_tree #(
  parameter int unsigned N  = 3,
  parameter int unsigned PW = 6,                 // width of one partial count
  parameter int unsigned SW = PW + $clog2(N + 1) // width of the column sum
) (
  input  logic              en,
  input  logic [N-1:0][PW-1:0] partial,
  output logic [SW-1:0]     sum
);

  logic [N:0][SW-1:0] chain;

  assign chain[0] = '0;
  for (genvar k = 0; k < N; k++) begin : g_add
    assign chain[k+1] = chain[k] + (en ? SW'(partial[k]) : SW'(0));
  end
  assign sum = chain[N];

endmodule
