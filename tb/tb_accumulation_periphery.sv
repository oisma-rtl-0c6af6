// tb_accumulation_periphery: checks the 256-bit to 9-bit accumulation
// periphery against $countones: all zero, all one (256, the full 9-bit
// range), one-hot patterns, whole 64-bit groups and random patterns of
// varying density.
module tb_accumulation_periphery;
  logic [255:0] sc_bits;
  logic [8:0]   sum;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  accumulation_periphery dut (.sc_bits, .sum);

  task automatic check();
    #1;
    checks++;
    if (sum != 9'($countones(sc_bits))) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%0d exp=%0d", sum, $countones(sc_bits));
    end
  endtask

  function automatic logic [255:0] rnd();
    logic [255:0] r;
    for (int k = 0; k < 8; k++) r[32*k +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sc_bits = '0; check();
    sc_bits = '1; check();
    for (int i = 0; i < 256; i++) begin sc_bits = '0; sc_bits[i] = 1'b1; check(); end
    for (int g = 0; g < 4; g++) begin sc_bits = '0; sc_bits[64*g +: 64] = '1; check(); end
    for (int i = 0; i < 10000; i++) begin
      unique case (i % 3)
        0: sc_bits = rnd();
        1: sc_bits = rnd() & rnd();
        default: sc_bits = rnd() | rnd() | rnd();
      endcase
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
