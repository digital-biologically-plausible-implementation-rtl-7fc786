// bnn_pkg: types and constants shared by the in-memory binarized neural
// network (BNN) design.
//
// The design stores each binary synaptic weight in a differential pair of
// hafnium-oxide resistive memory devices (2T2R cell) and computes the XNOR of
// weight and input inside the precharge sense amplifier that reads the pair.
// This package holds the programming commands of a single device, the side of
// a differential pair, the two array configurations and the resistance code
// used by the behavioural device model.
//
// Encoding choices of this implementation (the paper gives none of them):
//   * a binary value +1 is the bit 1 and -1 is the bit 0, so that the product
//     of two binary values is the XNOR of their bits;
//   * a device resistance is an unsigned code in kilo-ohms, saturated at
//     R_PRISTINE, the value of a device that was never formed.
package bnn_pkg;

  // Programming operation applied to one device (one 1T1R half of a cell).
  typedef enum logic [1:0] {
    PROG_NOP   = 2'd0,
    PROG_FORM  = 2'd1,   // one-time forming ramp
    PROG_SET   = 2'd2,   // to the low resistance state (LRS)
    PROG_RESET = 2'd3    // to the high resistance state (HRS)
  } prog_op_e;

  // Which device of a differential pair: bit line BL or complementary BLb.
  typedef enum logic {
    SIDE_BL  = 1'b0,
    SIDE_BLB = 1'b1
  } side_e;

  // Array configuration.
  typedef enum logic {
    MODE_PAR_TO_SEQ = 1'b0,  // M neurons per cycle, popcount tree active
    MODE_SEQ_TO_PAR = 1'b1   // one neuron per basic cell, inputs streamed
  } mode_e;

  // Width of a device resistance code (kilo-ohms).
  localparam int unsigned R_W = 8;
  // Resistance reported for a device that has not been formed.
  localparam logic [R_W-1:0] R_PRISTINE = '1;

endpackage
