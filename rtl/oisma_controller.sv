// oisma_controller: sequences the operations of the OISMA array.
//
// Every operation (read, AND/multiply-accumulate, write) takes two phases, as
// in the paper: first the bitlines are pre-charged or pre-discharged, then
// they float while the selected wordline is on and the sense amplifiers
// evaluate. Here each phase is one clock cycle, so the paper's 20 ns operation
// at 50 MHz corresponds to a 100 MHz clock; that split is this design's
// choice. The control word per phase is the paper's control table:
//   phase 1  read : WE=0 S=0 Sb=1 R=1 Pre_en=1     (BL charge,  BLb discharge)
//            AND  : WE=0 S=1 Sb=0 R=0 Pre_en=1     (BL from IN, BLb discharge)
//            write: WE=1 S=1 Sb=0 R=0 Pre_en=0     (BL, BLb from IN)
//   phase 2  read/AND: WE=0 S=0 Sb=1 R=0 Pre_en=0 (both float), wordline on,
//            sense amplifiers latch at the end of the phase
//            write: as phase 1 with the wordline on (cell programmed)
// Idle uses the floating word. The table leaves R and Pre_en free for writes;
// they are driven low here. The two-cycle write is this design's choice.
//
// Interface: a request (op_valid, op, addr) is taken when ready is high
// (accept pulses). ready is low only in phase 1, so back-to-back operations
// run every two cycles. out_valid pulses one cycle after phase 2 of a read or
// AND, when the latched sense-amplifier outputs are stable. Reset is
// asynchronous and active low (the paper does not describe reset).
module oisma_controller
  import oisma_pkg::*;
#(
  parameter int unsigned ROWS_P = 128
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    op_valid,
  input  op_e                     op,
  input  logic [$clog2(ROWS_P)-1:0] addr,
  output logic                    ready,
  output logic                    accept,
  output op_e                     op_q,
  output logic [$clog2(ROWS_P)-1:0] addr_q,
  output ctrl_t                   ctrl,
  output logic                    wl_en,
  output logic                    sense_en,
  output logic                    out_valid
);
  typedef enum logic [1:0] {
    ST_IDLE  = 2'd0,
    ST_PRE   = 2'd1,   // pre-charge / pre-discharge (or write set-up)
    ST_EVAL  = 2'd2    // floating & sensing (or write programming)
  } state_e;

  state_e state;

  assign ready  = (state != ST_PRE);
  assign accept = op_valid && ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      op_q      <= OP_READ;
      addr_q    <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= sense_en;
      if (accept) begin
        state  <= ST_PRE;
        op_q   <= op;
        addr_q <= addr;
      end else if (state == ST_PRE) begin
        state <= ST_EVAL;
      end else begin
        state <= ST_IDLE;
      end
    end
  end

  localparam ctrl_t CTRL_FLOAT = '{we: 1'b0, s: 1'b0, sb: 1'b1, r: 1'b0, pre_en: 1'b0};
  localparam ctrl_t CTRL_READ  = '{we: 1'b0, s: 1'b0, sb: 1'b1, r: 1'b1, pre_en: 1'b1};
  localparam ctrl_t CTRL_AND   = '{we: 1'b0, s: 1'b1, sb: 1'b0, r: 1'b0, pre_en: 1'b1};
  localparam ctrl_t CTRL_WRITE = '{we: 1'b1, s: 1'b1, sb: 1'b0, r: 1'b0, pre_en: 1'b0};

  always_comb begin
    ctrl     = CTRL_FLOAT;
    wl_en    = 1'b0;
    sense_en = 1'b0;
    unique case (state)
      ST_PRE: begin
        unique case (op_q)
          OP_READ:  ctrl = CTRL_READ;
          OP_MAC:   ctrl = CTRL_AND;
          OP_WRITE: ctrl = CTRL_WRITE;
          default:  ctrl = CTRL_FLOAT;
        endcase
      end
      ST_EVAL: begin
        wl_en = 1'b1;
        if (op_q == OP_WRITE) ctrl = CTRL_WRITE;
        else                  sense_en = (op_q == OP_READ) || (op_q == OP_MAC);
      end
      default: ;
    endcase
  end

  // A request must not be an undefined operation code.
  a_op_legal: assert property (@(posedge clk) disable iff (!rst_n)
    accept |-> (op inside {OP_READ, OP_MAC, OP_WRITE}));
endmodule
