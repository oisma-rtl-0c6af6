// tb_address_decoder: applies every row address with the enable high and
// low; with the enable high exactly the addressed wordline must be on, with
// it low none.
module tb_address_decoder;
  localparam int unsigned ROWS = 128;
  logic [6:0]      addr;
  logic            en;
  logic [ROWS-1:0] wl;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  address_decoder #(.ROWS(ROWS)) dut (.addr, .en, .wl);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < ROWS; a++) begin
      logic [ROWS-1:0] exp;
      exp = '0;
      exp[a] = 1'b1;
      addr = 7'(a);
      en = 1'b1; #1;
      checks++;
      if (wl !== exp) begin failures++; $display("FAIL addr=%0d en=1", a); end
      en = 1'b0; #1;
      checks++;
      if (wl !== '0) begin failures++; $display("FAIL addr=%0d en=0", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
