// pcsa_xnor: behavioural model of the precharge sense amplifier (PCSA)
// enriched with an XNOR, one per column of the 2T2R array.
//
// This is a behavioural model of an analog circuit. The real PCSA works in two
// phases. With SEN low, both outputs are precharged to the supply. With SEN
// high, the two selected devices discharge through SL; the branch with the
// lower resistance falls first and the cross-coupled inverters latch, so the
// two outputs give the comparison of the two resistances. Four extra
// transistors, driven by X and its complement, either connect BL and BLb to
// the two branches straight or cross them over, which turns the comparison
// into XNOR(X, stored bit) in the same operation.
//
// Model: with sen = 0, out = out_n = 1 (precharge). With sen = 1, the model
// compares the two resistances as seen through the X crossing: with x = 1,
// out = (r_bl > r_blb), the stored bit, since HRS/LRS encodes a 1; with
// x = 0 the branches are crossed and out = (r_blb > r_bl). out_n is the
// complement. Away from a tie, out is therefore XNOR(x, stored bit).
//
// Choices of this model, where the paper is silent: equal resistances (a
// metastable comparison in silicon) resolve to out = 0. The sense margin seen
// in measurements (errors below a resistance ratio of about five) is not
// modelled: the comparison is ideal. Which physical inverter node is labelled
// "output" in the schematic is not used; out is defined as the XNOR result.
// The caller registers out on the clock edge that ends the sense phase.
module pcsa_xnor
  import bnn_pkg::*;
(
  input  logic           sen,     // 0: precharge, 1: sense
  input  logic           x,       // input neuron bit
  input  logic [R_W-1:0] r_bl,    // resistance on BL
  input  logic [R_W-1:0] r_blb,   // resistance on BLb
  output logic           out,     // XNOR(x, stored bit) when sensing
  output logic           out_n
);

  logic [R_W-1:0] r_left, r_right;
  logic           decide;

  always_comb begin
    // X selects straight or crossed connection of BL/BLb to the latch.
    r_left  = x ? r_bl  : r_blb;
    r_right = x ? r_blb : r_bl;
    decide  = (r_left > r_right);
    out     = sen ? decide  : 1'b1;
    out_n   = sen ? ~decide : 1'b1;
  end

endmodule
