// tb_matmul: square matrix multiplications C = A x B on one OISMA array at its
// full size, for N = 4, 8, 16 and 32 (the sizes whose dot products fit in
// one row of 32 BP8 numbers).
//
// A and B hold random values in [0, 0.95); each is rounded to the nearest
// tenth 0.0 .. 0.9. Column j of B is written into row j (left-biased BP8
// patterns, unused number slots zero). For each row i of A the input vector
// (right-biased patterns) is loaded once and multiplied with rows 0..N-1
// while held (input stationary). Each 9-bit result must equal the number of
// ones of IN & row computed from the testbench's own BP tables; C[i][j] is
// that count divided by 10. The relative Frobenius error of C against the
// exact double-precision product of the unrounded values is printed per
// size (averaged over several random trials) and must stay below 2x the
// error reported for the Bent-Pyramid format at the same size (9.42 %,
// 6.60 %, 4.86 %, 3.65 %).
// Before that it checks the BP8 encoders of oisma_pkg against this
// testbench's tables and the published examples (0.3 right-biased is
// 00001110, 0.6 left-biased is 11111100, their product has two ones), and
// that for all 100 value pairs the 8-bit and the 10-bit patterns give the
// same number of ones after the AND.
module tb_matmul;
  import oisma_pkg::op_e, oisma_pkg::OP_MAC, oisma_pkg::OP_WRITE;
  localparam int C = 256;
  localparam int TRIALS = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         op_valid, in_load, ready, out_valid;
  op_e          op;
  logic [6:0]   addr;
  logic [C-1:0] data_in, sc_result;
  logic [8:0]   acc_out;

  oisma_top dut (.*);

  localparam logic [9:0] RB [10] = '{10'h000, 10'h010, 10'h018, 10'h01C, 10'h03C,
                                     10'h03E, 10'h07E, 10'h07F, 10'h0FF, 10'h1FF};
  localparam logic [9:0] LB [10] = '{10'h000, 10'h020, 10'h060, 10'h0E0, 10'h0F0,
                                     10'h1F0, 10'h1F8, 10'h3F8, 10'h3FC, 10'h3FE};

  int checks = 0, failures = 0;
  real a [32][32], b [32][32];
  int  ad [32][32], bd [32][32];

  function automatic int to_tenths(input real v);
    int t;
    t = int'($floor(v * 10.0 + 0.5));
    return (t > 9) ? 9 : t;
  endfunction

  // issue a request and return the 9-bit result of a MAC
  task automatic request(input op_e o, input int r, input logic ld, input logic [C-1:0] d,
                         output int res);
    @(negedge clk);
    while (!ready) @(negedge clk);
    op_valid = 1; op = o; addr = 7'(r); in_load = ld; data_in = d;
    @(negedge clk);
    op_valid = 0;
    res = -1;
    if (o == OP_MAC) begin
      while (!out_valid) @(negedge clk);
      res = int'(acc_out);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sizes [4] = '{4, 8, 16, 32};
    real paper_err [4] = '{0.0942, 0.0660, 0.0486, 0.0365};
    op_valid = 0; op = OP_MAC; addr = '0; in_load = 0; data_in = '0;
    // BP8 encoders and BP8 / BP10 equivalence
    checks++;
    if (oisma_pkg::bp8_right(4'd3) != 8'b00001110 || oisma_pkg::bp8_left(4'd6) != 8'b11111100 ||
        $countones(oisma_pkg::bp8_right(4'd3) & oisma_pkg::bp8_left(4'd6)) != 2) begin
      failures++; $display("FAIL published BP8 example");
    end
    for (int x = 0; x < 10; x++)
      for (int y = 0; y < 10; y++) begin
        checks++;
        if (oisma_pkg::bp8_right(4'(x)) != RB[x][8:1] || oisma_pkg::bp8_left(4'(y)) != LB[y][8:1] ||
            $countones(RB[x] & LB[y]) != $countones(RB[x][8:1] & LB[y][8:1])) begin
          failures++; $display("FAIL BP8 check x=%0d y=%0d", x, y);
        end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[s]) begin
      int n;
      real err_sum;
      n = sizes[s];
      err_sum = 0.0;
      for (int t = 0; t < TRIALS; t++) begin
        real num, den;
        num = 0.0; den = 0.0;
        for (int i = 0; i < n; i++)
          for (int k = 0; k < n; k++) begin
            a[i][k] = 0.95 * real'($urandom % 100000) / 100000.0;
            b[i][k] = 0.95 * real'($urandom % 100000) / 100000.0;
            ad[i][k] = to_tenths(a[i][k]);
            bd[i][k] = to_tenths(b[i][k]);
          end
        // weights: column j of B into row j
        for (int j = 0; j < n; j++) begin
          logic [C-1:0] w;
          int dummy;
          w = '0;
          for (int k = 0; k < n; k++) w[8*k +: 8] = LB[bd[k][j]][8:1];
          request(OP_WRITE, j, 0, w, dummy);
        end
        for (int i = 0; i < n; i++) begin
          logic [C-1:0] x;
          x = '0;
          for (int k = 0; k < n; k++) x[8*k +: 8] = RB[ad[i][k]][8:1];
          for (int j = 0; j < n; j++) begin
            int res, expc;
            real exact;
            request(OP_MAC, j, j == 0, x, res);
            expc = 0; exact = 0.0;
            for (int k = 0; k < n; k++) begin
              expc += $countones(RB[ad[i][k]][8:1] & LB[bd[k][j]][8:1]);
              exact += a[i][k] * b[k][j];
            end
            checks++;
            if (res != expc) begin
              failures++;
              $display("FAIL N=%0d C[%0d][%0d]: count %0d expected %0d", n, i, j, res, expc);
            end
            num += (exact - real'(res) / 10.0) ** 2;
            den += exact ** 2;
          end
        end
        err_sum += $sqrt(num) / $sqrt(den);
      end
      $display("N=%0d: mean relative Frobenius error %0.2f %% over %0d trials", n,
               100.0 * err_sum / TRIALS, TRIALS);
      checks++;
      if (err_sum / TRIALS > 2.0 * paper_err[s]) begin
        failures++;
        $display("FAIL N=%0d error above twice the published figure", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
