// tb_parallel_counter: exhaustive check of the 16-bit parallel counter.
// Every one of the 65536 input patterns is applied and the 5-bit count is
// compared with $countones of the pattern.
module tb_parallel_counter;
  logic [15:0] sc_bits;
  logic [4:0]  count;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  parallel_counter dut (.sc_bits, .count);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 65536; v++) begin
      sc_bits = 16'(v);
      #1;
      checks++;
      if (count != 5'($countones(sc_bits))) begin
        failures++;
        if (failures < 10) $display("FAIL in=%h count=%0d exp=%0d", sc_bits, count, $countones(sc_bits));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
