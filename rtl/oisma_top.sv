// oisma_top: one 4 KB OISMA array: 256 columns x 128 rows of 1T1R RRAM
// bitcells that turn a memory read into 256 parallel AND operations between
// an input bit vector IN and the selected row, followed by an accumulation
// periphery that counts the ones of the result.
//
// With BP8-coded numbers (8 columns per number) one MAC operation multiplies
// 32 input numbers with the 32 weights of a row and sums the products: the
// 9-bit result (0..256) is the dot product in tenths.
//
// Structure (following the paper): two 128x128 sub-arrays side by side share
// one address decoder; each column has its pre-charge/OISMA logic (BL) and
// write logic (BLb) and a sense amplifier; the sense-amplifier outputs form
// the 256-bit SC output and feed the accumulation periphery.
//
// Interface:
//   op_valid/op/addr/ready : request; taken when ready is high.
//   data_in, in_load       : for OP_WRITE, data_in is the row to write. For
//                            OP_MAC with in_load = 1, data_in is loaded into
//                            the input register first; with in_load = 0 the
//                            input held from earlier is used again (input
//                            stationary vector-matrix multiplication).
//   out_valid, sc_result, acc_out : result of a read (sc_result = row) or MAC
//                            (sc_result = bit-wise AND, acc_out = its popcount).
// Timing: an operation takes two clock cycles (pre-charge, then floating &
// sensing); out_valid comes one cycle after the second. Back-to-back requests
// run at one operation per two cycles. The input and write-data registers are
// this design's; the paper feeds IN from a second memory array.
module oisma_top
  import oisma_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    op_valid,
  input  op_e                     op,
  input  logic [$clog2(ROWS)-1:0] addr,
  input  logic                    in_load,
  input  logic [COLS-1:0]         data_in,
  output logic                    ready,
  output logic                    out_valid,
  output logic [COLS-1:0]         sc_result,
  output logic [SUM_W-1:0]        acc_out
);
  op_e                     op_q;
  logic [$clog2(ROWS)-1:0] addr_q;
  ctrl_t                   ctrl;
  logic                    accept, wl_en, sense_en;

  oisma_controller #(.ROWS_P(ROWS)) u_ctrl (
    .clk, .rst_n, .op_valid, .op, .addr,
    .ready, .accept, .op_q, .addr_q, .ctrl, .wl_en, .sense_en, .out_valid
  );

  // input (multiplier) register and write-data register
  logic [COLS-1:0] x_q, wd_q, col_in;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q  <= '0;
      wd_q <= '0;
    end else if (accept) begin
      if (op == OP_MAC && in_load) x_q  <= data_in;
      if (op == OP_WRITE)          wd_q <= data_in;
    end
  end
  assign col_in = (op_q == OP_WRITE) ? wd_q : x_q;

  logic [ROWS-1:0] wl;
  address_decoder #(.ROWS(ROWS)) u_dec (.addr(addr_q), .en(wl_en), .wl);

  bl_drive_e bl_drv [COLS];
  bl_drive_e blb_drv[COLS];
  for (genvar c = 0; c < COLS; c++) begin : g_col
    precharge_oisma_logic u_pch (.ctrl, .in_bit(col_in[c]), .bl(bl_drv[c]));
    write_logic           u_wr  (.ctrl, .in_bit(col_in[c]), .blb(blb_drv[c]));
  end

  logic [COLS-1:0] bl_high;
  for (genvar s = 0; s < COLS / SUB_COLS; s++) begin : g_sub
    rram_subarray #(.COLS_P(SUB_COLS), .ROWS_P(ROWS)) u_arr (
      .clk, .rst_n, .wl,
      .bl_drv (bl_drv [s*SUB_COLS +: SUB_COLS]),
      .blb_drv(blb_drv[s*SUB_COLS +: SUB_COLS]),
      .bl_high(bl_high[s*SUB_COLS +: SUB_COLS])
    );
  end

  sense_amp #(.N(COLS)) u_sa (.clk, .rst_n, .sense_en, .bl_high, .sa_out(sc_result));

  accumulation_periphery u_acc (.sc_bits(sc_result), .sum(acc_out));
endmodule
