// tb_sense_amp: checks that the sense amplifiers latch the bitline level at
// the clock edge ending a phase with sense_en high, hold it otherwise, and
// clear on reset.
module tb_sense_amp;
  localparam int unsigned N = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sense_en;
  logic [N-1:0] bl_high, sa_out, held;
  int checks = 0, failures = 0;

  sense_amp #(.N(N)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sense_en = 0; bl_high = '1;
    repeat (2) @(posedge clk);
    #1; checks++;
    if (sa_out !== '0) begin failures++; $display("FAIL not cleared by reset"); end
    rst_n = 1;
    held = '0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      sense_en = ($urandom % 3) == 0;
      bl_high  = N'($urandom);
      @(posedge clk); #1;
      if (sense_en) held = bl_high;
      checks++;
      if (sa_out !== held) begin failures++; $display("FAIL i=%0d sa_out=%h exp=%h", i, sa_out, held); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
