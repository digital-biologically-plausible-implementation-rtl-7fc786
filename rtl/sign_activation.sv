// sign_activation: the neuron of the binarized network. It subtracts the
// neuron threshold T from the complete popcount P and takes the sign bit of
// the difference: A = sign(P - T). In the bit encoding of this design (+1 is
// 1, -1 is 0) the activation is 1 when P - T >= 0 and 0 when P - T < 0, i.e.
// the inverted sign bit. Combinational.
//
// From the paper: subtraction of a stored threshold and use of the sign bit.
// Choices here: sign(0) = +1, and thresholds are unsigned (a threshold of 0
// makes the neuron always +1, a threshold above the largest popcount always
// -1), which covers every threshold a popcount can be compared with.
module sign_activation #(
  parameter int unsigned PW = 11,   // popcount width
  parameter int unsigned TW = 11    // threshold width
) (
  input  logic [PW-1:0] pop,
  input  logic [TW-1:0] thr,
  output logic          act
);

  localparam int unsigned DW = ((PW > TW) ? PW : TW) + 1;
  logic [DW-1:0] diff;

  always_comb begin
    diff = DW'(pop) - DW'(thr);
    act  = ~diff[DW-1];
  end

endmodule
