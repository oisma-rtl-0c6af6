// tb_sc_to_binary_64: checks the 64-bit SC-to-binary converter against
// $countones on all-zero, all-one, walking-one and 20000 random patterns of
// varying density.
module tb_sc_to_binary_64;
  logic [63:0] sc_bits;
  logic [6:0]  count;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  sc_to_binary_64 dut (.sc_bits, .count);

  task automatic check();
    #1;
    checks++;
    if (count != 7'($countones(sc_bits))) begin
      failures++;
      if (failures < 10) $display("FAIL in=%h count=%0d exp=%0d", sc_bits, count, $countones(sc_bits));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sc_bits = '0;       check();
    sc_bits = '1;       check();
    for (int i = 0; i < 64; i++) begin sc_bits = 64'd1 << i; check(); end
    for (int i = 0; i < 20000; i++) begin
      logic [63:0] a, b;
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      unique case (i % 4)
        0: sc_bits = a;
        1: sc_bits = a & b;
        2: sc_bits = a | b;
        default: sc_bits = ~(a & b & {$urandom, $urandom});
      endcase
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
