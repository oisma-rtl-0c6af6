// rram_subarray: behavioural model of a 128-column x 128-row 1T1R RRAM bitcell
// sub-array together with its bitlines.
//
// The real part is a custom analog macro (RRAM devices in the back end of
// line, 5 V access transistors); this model reproduces its logic function.
// A bitcell stores logic 1 as the high resistance state (HRS) and logic 0 as
// the low resistance state (LRS), as in the paper. Per column:
//  * Programming: when the wordline of a row is on and BL / BLb are driven in
//    opposite directions, the cell takes BL's value (BL charged, BLb
//    discharged: 1; BL discharged, BLb charged: 0), matching the paper's
//    write rows. Which way the device is oriented is this model's choice.
//  * Bitline charge: a driven BL takes the driven level (charged = above the
//    sense reference, discharged = below). A floating BL keeps its level,
//    unless the wordline is on and the selected cell is LRS, which discharges
//    it quickly. An HRS cell discharges it too slowly to cross the reference.
//    bl_high is the level at the end of the present phase, as the sense
//    amplifier sees it; the level is kept in bl_q from phase to phase.
// The clock edge ends a phase. Cells have no reset (non-volatile, contents
// arbitrary until written); the bitlines start discharged.
module rram_subarray
  import oisma_pkg::*;
#(
  parameter int unsigned COLS_P = 128,
  parameter int unsigned ROWS_P = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ROWS_P-1:0] wl,
  input  bl_drive_e         bl_drv  [COLS_P],
  input  bl_drive_e         blb_drv [COLS_P],
  output logic [COLS_P-1:0] bl_high
);
  logic [COLS_P-1:0] bitcell [ROWS_P];
  logic [COLS_P-1:0] bl_q;

  // selected row (wordlines are one-hot or all off)
  logic                      row_on;
  logic [$clog2(ROWS_P)-1:0] row;
  always_comb begin
    row_on = |wl;
    row    = '0;
    for (int r = 0; r < ROWS_P; r++)
      if (wl[r]) row = r[$clog2(ROWS_P)-1:0];
  end

  logic [COLS_P-1:0] row_bits;
  assign row_bits = bitcell[row];

  logic [COLS_P-1:0] wr_en, wr_val;
  always_comb begin
    for (int c = 0; c < COLS_P; c++) begin
      wr_en[c]  = row_on &&
                  (((bl_drv[c] == BL_CHARGE)    && (blb_drv[c] == BL_DISCHARGE)) ||
                   ((bl_drv[c] == BL_DISCHARGE) && (blb_drv[c] == BL_CHARGE)));
      wr_val[c] = (bl_drv[c] == BL_CHARGE);
      unique case (bl_drv[c])
        BL_CHARGE:    bl_high[c] = 1'b1;
        BL_DISCHARGE: bl_high[c] = 1'b0;
        default:      bl_high[c] = bl_q[c] & (~row_on | row_bits[c]);
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bl_q <= '0;
    else        bl_q <= bl_high;
  end

  always_ff @(posedge clk) begin
    if (row_on)
      for (int c = 0; c < COLS_P; c++)
        if (wr_en[c]) bitcell[row][c] <= wr_val[c];
  end

  a_wl_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(wl));
endmodule
