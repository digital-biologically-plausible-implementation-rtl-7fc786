// column_decoder: a column decoder of the 2T2R array. It turns a binary column
// address into a one-hot column select and multiplexes the W-bit word of the
// selected column onto dout. The array uses two of them: one above the sense
// amplifiers, putting one amplifier output on the single read output, and one
// below the array, giving access to the BL/BLb pair of one column (programming
// and direct resistance measurement with the amplifiers bypassed).
// With en low, sel is all zero and dout is zero. Combinational. The paper
// names the block only; the structure is the simplest one that does it.
module column_decoder #(
  parameter int unsigned COLS = 32,
  parameter int unsigned W    = 1,
  parameter int unsigned AW   = $clog2(COLS)
) (
  input  logic                   en,
  input  logic [AW-1:0]          addr,
  input  logic [COLS-1:0][W-1:0] din,
  output logic [COLS-1:0]        sel,
  output logic [W-1:0]           dout
);

  always_comb begin
    sel  = '0;
    dout = '0;
    for (int c = 0; c < COLS; c++)
      if (en && (addr == AW'(c))) begin
        sel[c] = 1'b1;
        dout   = din[c];
      end
  end

endmodule
