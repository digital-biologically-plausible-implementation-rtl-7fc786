// popcount: the counter embedded in each basic cell. It counts the ones among
// the W_IN XNOR results that the sense amplifiers latched for one row, giving
// the partial POPCOUNT of equation A_j = sign(POPCOUNT(XNOR(W_ji, X_i)) - T_j)
// over the inputs held by one memory block. Combinational adder tree.
//
// The paper calls these "five bits counters". Counting 32 bits needs values
// 0..32, i.e. six bits, so the output width is $clog2(W_IN + 1) (6 for the
// 32-column block) rather than five; a five-bit result would wrap for an
// all-ones row.
module popcount #(
  parameter int unsigned W_IN = 32,
  parameter int unsigned OW   = $clog2(W_IN + 1)
) (
  input  logic [W_IN-1:0] bits,
  output logic [OW-1:0]   count
);

  always_comb begin
    count = '0;
    for (int i = 0; i < W_IN; i++) count = count + OW'(bits[i]);
  end

endmodule
