// row_decoder: the row decoder of the 2T2R array. It turns a binary row
// address into a one-hot select of one word line (WL) and source line (SL).
// With en low no line is selected, so no device of the array is accessed.
// Combinational; the paper names the block only ("integrated CMOS digital
// decoders"), so the binary-to-one-hot form is the simplest one that does it.
module row_decoder #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned AW   = $clog2(ROWS)
) (
  input  logic          en,
  input  logic [AW-1:0] addr,
  output logic [ROWS-1:0] wl
);

  always_comb begin
    wl = '0;
    for (int r = 0; r < ROWS; r++)
      if (en && (addr == AW'(r))) wl[r] = 1'b1;
  end

endmodule
