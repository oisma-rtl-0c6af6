// tb_write_logic: applies every row of the column control table
// (WE, S, Sb, R, IN, Pre_en, with each "don't care" taken both ways) and
// checks the BLb drive state (C = charge, D = discharge, F = floating) listed
// in the table for that row.
module tb_write_logic;
  import oisma_pkg::*;
  ctrl_t     ctrl;
  logic      in_bit;
  bl_drive_e bl;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  write_logic dut (.ctrl, .in_bit, .blb(bl));

  // one table row; x_* = 1 marks a don't-care input
  task automatic row(input string name, input logic we, s, sb, r, in, pe,
                     input bit x_r, x_in, x_pe, input bl_drive_e exp);
    for (int k = 0; k < 8; k++) begin
      ctrl.we = we; ctrl.s = s; ctrl.sb = sb;
      ctrl.r      = x_r  ? k[0] : r;
      in_bit      = x_in ? k[1] : in;
      ctrl.pre_en = x_pe ? k[2] : pe;
      #1;
      checks++;
      if (bl != exp) begin
        failures++;
        $display("FAIL %s k=%0d bl=%s exp=%s", name, k, bl.name(), exp.name());
      end
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    //        name            WE S Sb R IN Pe   xR xIN xPe   BLb
    row("read ph1",          0, 0, 1, 1, 0, 1,  0, 1,  0,  BL_DISCHARGE);
    row("read ph2",          0, 0, 1, 0, 0, 0,  0, 1,  0,  BL_FLOAT);
    row("and in0 ph1",       0, 1, 0, 0, 0, 1,  0, 0,  0,  BL_DISCHARGE);
    row("and in0 ph2",       0, 0, 1, 0, 0, 0,  0, 1,  0,  BL_FLOAT);
    row("and in1 ph1",       0, 1, 0, 0, 1, 1,  0, 0,  0,  BL_DISCHARGE);
    row("and in1 ph2",       0, 0, 1, 0, 0, 0,  0, 1,  0,  BL_FLOAT);
    row("write 0",           1, 1, 0, 0, 0, 0,  1, 0,  1,  BL_CHARGE);
    row("write 1",           1, 1, 0, 0, 1, 0,  1, 0,  1,  BL_DISCHARGE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
