// memory_block: one kilobit in-memory computing block, the memory of a basic
// cell of the BNN array. It assembles a ROWS x COLS differential (2T2R)
// resistive memory array, its row decoder, one XNOR-enriched precharge sense
// amplifier (PCSA) per column, a column decoder above the amplifiers (single
// bit read output) and one below the array (access to BL/BLb of one column).
//
// Operations, all addressed by row_addr / col_addr:
//   * XNOR row read (rd_en = 1): every PCSA senses its pair of the addressed
//     row against its own input bit x[c]; on the clock edge the COLS results
//     are latched in xnor_q and row_valid goes high for one cycle. With
//     x = all ones this is a plain memory read of the row.
//   * single bit read: rd_bit is the latched PCSA output of column col_addr
//     (the array's "out" pin).
//   * programming (prog_op != PROG_NOP): one device, chosen by row_addr,
//     col_addr and prog_side, is formed, SET or RESET on the clock edge.
//   * bypass (bypass = 1): the amplifiers stay in precharge and the BL/BLb
//     resistances of the addressed pair appear on meas_r_bl / meas_r_blb, as
//     the test chip lets external instruments measure the devices directly.
// Timing: one row per clock, result registered one cycle after rd_en.
// At most one of rd_en, programming and bypass may be active in a cycle.
//
// From the paper: the 2T2R kilobit array with a PCSA per column, row and
// column decoders, XNOR inside the amplifier, the optional PCSA bypass.
// Choices of this design: SEN is driven by rd_en for one clock period, the
// latched outputs are cleared by reset, and the control encoding.
module memory_block
  import bnn_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32,
  parameter int unsigned RAW  = $clog2(ROWS),
  parameter int unsigned CAW  = $clog2(COLS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_en,
  input  logic [RAW-1:0]    row_addr,
  input  logic [CAW-1:0]    col_addr,
  input  logic [COLS-1:0]   x,
  input  prog_op_e          prog_op,
  input  side_e             prog_side,
  input  logic [R_W-1:0]    prog_r,
  input  logic              bypass,
  output logic [COLS-1:0]   xnor_q,
  output logic              row_valid,
  output logic              rd_bit,
  output logic [R_W-1:0]    meas_r_bl,
  output logic [R_W-1:0]    meas_r_blb
);

  logic                     prog_act;
  logic                     row_en;
  logic                     sen;
  logic [ROWS-1:0]          wl;
  logic [COLS-1:0]          col_sel;
  logic [COLS-1:0][R_W-1:0] r_bl, r_blb;
  logic [COLS-1:0]          sa_out, sa_out_n;
  logic [COLS-1:0][2*R_W-1:0] pair_r;
  logic [2*R_W-1:0]         meas_pair;
  logic [COLS-1:0][0:0]     q_bits;
  logic [COLS-1:0]          top_sel_unused;

  assign prog_act = (prog_op != PROG_NOP);
  assign row_en   = rd_en | prog_act | bypass;
  assign sen      = rd_en & ~bypass;

  row_decoder #(.ROWS(ROWS)) u_row_dec (
    .en   (row_en),
    .addr (row_addr),
    .wl   (wl)
  );

  // Bottom column decoder: BL/BLb access for programming and measurement.
  always_comb
    for (int c = 0; c < COLS; c++) pair_r[c] = {r_bl[c], r_blb[c]};

  column_decoder #(.COLS(COLS), .W(2*R_W)) u_col_dec_bl (
    .en   (prog_act | bypass),
    .addr (col_addr),
    .din  (pair_r),
    .sel  (col_sel),
    .dout (meas_pair)
  );

  assign meas_r_bl  = bypass ? meas_pair[2*R_W-1:R_W] : '0;
  assign meas_r_blb = bypass ? meas_pair[R_W-1:0]     : '0;

  oxram_2t2r_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk       (clk),
    .wl        (wl),
    .col_sel   (col_sel),
    .prog_op   (prog_op),
    .prog_side (prog_side),
    .prog_r    (prog_r),
    .r_bl      (r_bl),
    .r_blb     (r_blb)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_pcsa
    pcsa_xnor u_pcsa (
      .sen   (sen),
      .x     (x[c]),
      .r_bl  (r_bl[c]),
      .r_blb (r_blb[c]),
      .out   (sa_out[c]),
      .out_n (sa_out_n[c])
    );
  end

  // The PCSA latches at the end of the sense phase.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xnor_q    <= '0;
      row_valid <= 1'b0;
    end else begin
      row_valid <= sen;
      if (sen) xnor_q <= sa_out;
    end
  end

  // Top column decoder: one latched amplifier output on the read pin.
  always_comb
    for (int c = 0; c < COLS; c++) q_bits[c] = xnor_q[c];

  column_decoder #(.COLS(COLS), .W(1)) u_col_dec_out (
    .en   (1'b1),
    .addr (col_addr),
    .din  (q_bits),
    .sel  (top_sel_unused),
    .dout (rd_bit)
  );

  // One operation per cycle; complementary outputs must disagree while sensing.
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n)
    !(prog_act && (rd_en || bypass)))
    else $error("memory_block: programming together with a read or bypass");
  a_compl: assert property (@(posedge clk) disable iff (!rst_n)
    sen |-> ((sa_out ^ sa_out_n) == '1))
    else $error("memory_block: PCSA outputs not complementary");

endmodule
