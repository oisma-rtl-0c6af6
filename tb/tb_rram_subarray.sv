// tb_rram_subarray: checks the bitcell sub-array model at 16 columns x 8 rows.
// The testbench drives the bitlines itself, the way the column logic would:
// it programs random rows (BL/BLb driven opposite with the wordline on), then
// reads them back (BL pre-charged, then floating with the wordline on) and
// performs AND operations (BL pre-charged where IN = 1, pre-discharged where
// IN = 0), comparing bl_high at the end of the floating phase with the
// stored data and with IN & data. It also checks that a floating bitline
// with no wordline on keeps its pre-charge, and that driving the bitlines
// with the wordline off leaves the cells unchanged.
module tb_rram_subarray;
  import oisma_pkg::*;
  localparam int unsigned C = 16, R = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [R-1:0] wl;
  bl_drive_e    bl_drv [C];
  bl_drive_e    blb_drv[C];
  logic [C-1:0] bl_high;
  logic [C-1:0] model [R];
  int checks = 0, failures = 0;

  rram_subarray #(.COLS_P(C), .ROWS_P(R)) dut (.*);

  task automatic drive(input logic [C-1:0] v, input bit write, input logic [R-1:0] w);
    for (int c = 0; c < C; c++) begin
      bl_drv[c]  = v[c] ? BL_CHARGE : BL_DISCHARGE;
      blb_drv[c] = write ? (v[c] ? BL_DISCHARGE : BL_CHARGE) : BL_DISCHARGE;
    end
    wl = w;
  endtask

  task automatic float_all(input logic [R-1:0] w);
    for (int c = 0; c < C; c++) begin bl_drv[c] = BL_FLOAT; blb_drv[c] = BL_FLOAT; end
    wl = w;
  endtask

  task automatic write_row(input int r, input logic [C-1:0] v);
    @(negedge clk); drive(v, 1, '0);              // set-up, wordline off
    @(negedge clk); drive(v, 1, R'(1) << r);      // program
    @(negedge clk); float_all('0);
    model[r] = v;
  endtask

  // pre-charge phase with pattern pc, then floating with row r on
  task automatic sense_row(input string what, input int r, input logic [C-1:0] pc);
    @(negedge clk); drive(pc, 0, '0);
    @(negedge clk); float_all(R'(1) << r);
    #1;
    checks++;
    if (bl_high !== (pc & model[r])) begin
      failures++;
      $display("FAIL %s row %0d: bl_high=%h exp=%h", what, r, bl_high, pc & model[r]);
    end
    @(negedge clk); float_all('0);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    float_all('0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < R; r++) write_row(r, C'($urandom));
    write_row(0, '1);
    write_row(1, '0);
    for (int r = 0; r < R; r++) sense_row("read", r, '1);
    for (int i = 0; i < 40; i++) sense_row("and", i % R, C'($urandom));
    // pre-charge then float with no wordline: level kept
    @(negedge clk); drive('1, 0, '0);
    @(negedge clk); float_all('0);
    #1; checks++;
    if (bl_high !== '1) begin failures++; $display("FAIL floating bitline lost charge"); end
    // drive write pattern with wordline off: no change
    @(negedge clk); drive(~model[3], 1, '0);
    @(negedge clk); float_all('0);
    sense_row("no write without wordline", 3, '1);
    // overwrite and re-read
    for (int r = 0; r < R; r++) write_row(r, C'($urandom));
    for (int r = 0; r < R; r++) sense_row("read after rewrite", r, '1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
