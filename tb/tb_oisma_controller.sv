// tb_oisma_controller: checks the operation sequencer.
// For a read, an AND and a write it checks, phase by phase, the control word
// (WE, S, Sb, R, Pre_en) against the column control table, the wordline and
// sense enables, ready, and that out_valid pulses exactly one cycle after the
// sensing phase of read/AND (and never for a write). It then holds a stream
// of back-to-back requests and checks the rate of one operation per two
// cycles, and checks that an idle controller floats the bitlines.
module tb_oisma_controller;
  import oisma_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic op_valid;
  op_e  op;
  logic [6:0] addr;
  logic ready, accept, wl_en, sense_en, out_valid;
  op_e  op_q;
  logic [6:0] addr_q;
  ctrl_t ctrl;
  int checks = 0, failures = 0;

  oisma_controller #(.ROWS_P(128)) dut (.*);

  // expected control words {WE,S,Sb,R,Pre_en}
  localparam logic [4:0] W_FLOAT = 5'b00100;
  localparam logic [4:0] W_READ  = 5'b00111;
  localparam logic [4:0] W_AND   = 5'b01001;
  localparam logic [4:0] W_WRITE = 5'b11000;

  task automatic expect_(input string what, input logic [4:0] w, input logic wl,
                         input logic se, input logic rdy, input logic ov);
    checks++;
    if ({ctrl.we, ctrl.s, ctrl.sb, ctrl.r, ctrl.pre_en} !== w || wl_en !== wl ||
        sense_en !== se || ready !== rdy || out_valid !== ov) begin
      failures++;
      $display("FAIL %s: ctrl=%b wl_en=%b sense_en=%b ready=%b out_valid=%b", what,
               {ctrl.we, ctrl.s, ctrl.sb, ctrl.r, ctrl.pre_en}, wl_en, sense_en, ready, out_valid);
    end
  endtask

  task automatic one_op(input op_e o, input logic [6:0] a, input logic [4:0] w1, input logic [4:0] w2,
                        input logic se);
    @(negedge clk);
    op_valid = 1; op = o; addr = a;
    @(posedge clk); #1;
    op_valid = 0;
    expect_({o.name(), " phase1"}, w1, 1'b0, 1'b0, 1'b0, 1'b0);
    checks++;
    if (addr_q != a || op_q != o) begin failures++; $display("FAIL captured op/addr"); end
    @(posedge clk); #1;
    expect_({o.name(), " phase2"}, w2, 1'b1, se, 1'b1, 1'b0);
    @(posedge clk); #1;
    expect_({o.name(), " after"}, W_FLOAT, 1'b0, 1'b0, 1'b1, se);
    @(posedge clk); #1;
    expect_({o.name(), " idle"}, W_FLOAT, 1'b0, 1'b0, 1'b1, 1'b0);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    op_valid = 0; op = OP_READ; addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    expect_("idle after reset", W_FLOAT, 1'b0, 1'b0, 1'b1, 1'b0);
    one_op(OP_READ,  7'd5,   W_READ,  W_FLOAT, 1'b1);
    one_op(OP_MAC,   7'd127, W_AND,   W_FLOAT, 1'b1);
    one_op(OP_WRITE, 7'd64,  W_WRITE, W_WRITE, 1'b0);

    // back-to-back: 20 MAC requests held valid; one accepted every 2 cycles
    begin
      int acc = 0, cyc = 0, ov = 0;
      @(negedge clk);
      op_valid = 1; op = OP_MAC;
      while (acc < 20) begin
        @(posedge clk);
        if (accept) acc++;
        if (out_valid) ov++;
        cyc++;
        #1; addr = addr + 7'd1;
      end
      op_valid = 0;
      repeat (3) begin @(posedge clk); if (out_valid) ov++; end
      checks++;
      if (cyc != 39) begin failures++; $display("FAIL 20 ops took %0d cycles, expected 39", cyc); end
      checks++;
      if (ov != 20) begin failures++; $display("FAIL %0d results, expected 20", ov); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
