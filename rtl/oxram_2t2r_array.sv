// oxram_2t2r_array: behavioural model of the differential (2T2R) hafnium-oxide
// resistive memory array, ROWS x COLS cells of two devices each
// (32 x 32 cells = 2048 devices = one kilobit by default).
//
// This is a behavioural model, not synthesizable logic of the real part: the
// real array is analog (one transistor and one HfO2 resistor per device, on
// word lines WL, source lines SL, bit lines BL and BLb). The model keeps one
// resistance code per device and one "formed" flag.
//
// Programming is device by device, as on the fabricated chip. On a rising clock
// edge, the device at the selected row (one-hot wl, which also stands for the
// SL of that row) and the selected column (one-hot col_sel), on side
// prog_side, receives prog_op:
//   PROG_FORM  marks the device formed and gives it resistance prog_r;
//   PROG_SET   (to LRS) and PROG_RESET (to HRS) give it resistance prog_r,
//              but only if it was formed; an unformed device does not switch.
// The model has no device physics. The resistance a pulse leaves behind is
// supplied by the caller in prog_r. This is how cycle-to-cycle and
// device-to-device variability, and thus bit errors, enter a simulation.
//
// Reading is combinational: r_bl/r_blb give the resistances of every pair in
// the row whose word line is on. A device that is not formed, or a column with
// no word line on, reads R_PRISTINE (no current path).
//
// The paper fixes the size (2048 devices, 32 x 32 pairs in its schematic) and
// the differential encoding: the pair LRS/HRS (BL/BLb) is a 0 and HRS/LRS is a
// 1. The resistance code, the prog_r port and the rule that an unformed device
// ignores SET/RESET are choices of this model. A fresh die starts unformed.
module oxram_2t2r_array
  import bnn_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32
) (
  input  logic                          clk,
  input  logic [ROWS-1:0]               wl,        // one-hot word line (and SL) select
  input  logic [COLS-1:0]               col_sel,   // one-hot bit line pair select
  input  prog_op_e                      prog_op,
  input  side_e                         prog_side,
  input  logic [R_W-1:0]                prog_r,    // resistance left by the pulse
  output logic [COLS-1:0][R_W-1:0]      r_bl,      // selected row, BL devices
  output logic [COLS-1:0][R_W-1:0]      r_blb      // selected row, BLb devices
);

  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CAW = (COLS > 1) ? $clog2(COLS) : 1;

  // One memory word per row: the resistance codes and formed flags of the
  // COLS devices of that row on each side.
  logic [COLS-1:0][R_W-1:0] res_bl  [ROWS];
  logic [COLS-1:0][R_W-1:0] res_blb [ROWS];
  logic [COLS-1:0]          frm_bl  [ROWS];
  logic [COLS-1:0]          frm_blb [ROWS];

  // The decoders drive one-hot lines; recover the indices they encode.
  logic [RAW-1:0] ri;
  logic [CAW-1:0] ci;
  logic           row_on, col_on;

  always_comb begin
    ri = '0;
    ci = '0;
    for (int r = 0; r < ROWS; r++) if (wl[r])      ri = RAW'(r);
    for (int c = 0; c < COLS; c++) if (col_sel[c]) ci = CAW'(c);
    row_on = |wl;
    col_on = |col_sel;
  end

  // A fresh die: nothing formed.
  initial begin
    for (int r = 0; r < ROWS; r++) begin
      frm_bl[r]  = '0;
      frm_blb[r] = '0;
    end
  end

  // Programming of one device.
  always_ff @(posedge clk) begin
    if (row_on && col_on) begin
      unique case (prog_op)
        PROG_FORM: begin
          if (prog_side == SIDE_BL) begin
            frm_bl[ri][ci] <= 1'b1;
            res_bl[ri][ci] <= prog_r;
          end else begin
            frm_blb[ri][ci] <= 1'b1;
            res_blb[ri][ci] <= prog_r;
          end
        end
        PROG_SET, PROG_RESET: begin
          if (prog_side == SIDE_BL) begin
            if (frm_bl[ri][ci]) res_bl[ri][ci] <= prog_r;
          end else begin
            if (frm_blb[ri][ci]) res_blb[ri][ci] <= prog_r;
          end
        end
        default: ;
      endcase
    end
  end

  // Row read: resistance of the devices on the active word line.
  logic [COLS-1:0][R_W-1:0] row_bl, row_blb;
  logic [COLS-1:0]          row_fbl, row_fblb;

  assign row_bl   = res_bl[ri];
  assign row_blb  = res_blb[ri];
  assign row_fbl  = frm_bl[ri];
  assign row_fblb = frm_blb[ri];

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      r_bl[c]  = (row_on && row_fbl[c])  ? row_bl[c]  : R_PRISTINE;
      r_blb[c] = (row_on && row_fblb[c]) ? row_blb[c] : R_PRISTINE;
    end
  end

endmodule
