// tb_oisma_top: end-to-end test of one OISMA array at its full size
// (256 columns x 128 rows, no parameter overrides).
//
// It fills all 128 rows with BP8-coded weights (left-biased patterns; two
// rows hold all-ones and raw random bits), reads every row back, then runs
// vector-matrix multiplications: an input vector of 32 BP8-coded numbers
// (right-biased patterns) is loaded once and multiplied with every row while
// it stays in the input register. Each result is compared with a reference
// computed here from the testbench's own copy of the Bent-Pyramid tables:
// the 256-bit SC output must equal IN & row and the 9-bit sum its number of
// ones. The latency (result two cycles after the request is taken) and the
// streaming rate (one operation per two cycles) are checked, and each
// mechanism of the array is counted and must occur: write, read, MAC with a
// new input, MAC reusing the held input (vector-matrix mode), a run of MACs
// with a new input every time (single mode), back-to-back requests, columns
// whose IN = 0 masks a stored 1, and a full-scale sum of 256.
module tb_oisma_top;
  import oisma_pkg::op_e, oisma_pkg::OP_READ, oisma_pkg::OP_MAC, oisma_pkg::OP_WRITE;
  localparam int C = 256, R = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         op_valid, in_load, ready, out_valid;
  op_e          op;
  logic [6:0]   addr;
  logic [C-1:0] data_in, sc_result;
  logic [8:0]   acc_out;

  oisma_top dut (.*);

  // Bent-Pyramid 10-bit datasets, leftmost bit first; BP8 drops both ends.
  localparam logic [9:0] RB [10] = '{10'h000, 10'h010, 10'h018, 10'h01C, 10'h03C,
                                     10'h03E, 10'h07E, 10'h07F, 10'h0FF, 10'h1FF};
  localparam logic [9:0] LB [10] = '{10'h000, 10'h020, 10'h060, 10'h0E0, 10'h0F0,
                                     10'h1F0, 10'h1F8, 10'h3F8, 10'h3FC, 10'h3FE};
  function automatic logic [C-1:0] pack(input int d [32], input bit right);
    logic [C-1:0] v;
    for (int j = 0; j < 32; j++) v[8*j +: 8] = right ? RB[d[j]][8:1] : LB[d[j]][8:1];
    return v;
  endfunction

  logic [C-1:0] mem [R];      // reference contents
  logic [C-1:0] x_ref;        // reference input register
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { logic is_mac; logic [C-1:0] sc; int cnt; int due; } exp_t;
  exp_t q[$];

  // mechanism counters
  int n_write = 0, n_read = 0, n_mac_load = 0, n_mac_reuse = 0, n_b2b = 0,
      n_masked = 0, n_full = 0, n_single = 0;
  int last_issue = -100;

  task automatic issue(input op_e o, input int a, input logic ld, input logic [C-1:0] d);
    exp_t e;
    @(negedge clk);
    while (!ready) @(negedge clk);
    op_valid = 1; op = o; addr = 7'(a); in_load = ld; data_in = d;
    if (cyc - last_issue == 2) n_b2b++;
    last_issue = cyc;
    unique case (o)
      OP_WRITE: begin mem[a] = d; n_write++; end
      OP_READ: begin
        e.is_mac = 0; e.sc = mem[a]; e.cnt = $countones(mem[a]); e.due = cyc + 3;
        q.push_back(e); n_read++;
      end
      default: begin
        if (ld) begin x_ref = d; n_mac_load++; end else n_mac_reuse++;
        e.is_mac = 1; e.sc = x_ref & mem[a]; e.cnt = $countones(x_ref & mem[a]); e.due = cyc + 3;
        n_masked += $countones(~x_ref & mem[a]);
        if (e.cnt == 256) n_full++;
        q.push_back(e);
      end
    endcase
  endtask

  task automatic idle();
    @(negedge clk); op_valid = 0;
  endtask

  // result monitor
  always @(negedge clk) if (rst_n && out_valid) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected result"); end
    else begin
      e = q.pop_front();
      if (sc_result !== e.sc) begin failures++; $display("FAIL sc_result mismatch"); end
      checks++;
      if (e.is_mac && int'(acc_out) != e.cnt) begin
        failures++; $display("FAIL acc_out=%0d exp=%0d", acc_out, e.cnt);
      end
      checks++;
      if (cyc != e.due) begin failures++; $display("FAIL latency: result at %0d due %0d", cyc, e.due); end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d [32];
    int t0;
    op_valid = 0; op = OP_READ; addr = '0; in_load = 0; data_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // weights
    for (int r = 0; r < R; r++) begin
      for (int j = 0; j < 32; j++) d[j] = $urandom % 10;
      if (r == 126)      issue(OP_WRITE, r, 0, {8{$urandom}});
      else if (r == 127) issue(OP_WRITE, r, 0, '1);
      else               issue(OP_WRITE, r, 0, pack(d, 0));
    end
    // read back every row
    for (int r = 0; r < R; r++) issue(OP_READ, r, 0, '0);

    // VMM: three input vectors, each held for all rows; streaming rate check
    for (int v = 0; v < 3; v++) begin
      for (int j = 0; j < 32; j++) d[j] = $urandom % 10;
      t0 = cyc;
      for (int r = 0; r < R; r++) issue(OP_MAC, r, r == 0, pack(d, 1));
      checks++;
      if (cyc - t0 != 2 * R) begin
        failures++; $display("FAIL %0d MACs took %0d cycles, expected %0d", R, cyc - t0, 2 * R);
      end
    end
    // single mode: a new input vector with every MAC
    for (int r = 0; r < 16; r++) begin
      for (int j = 0; j < 32; j++) d[j] = $urandom % 10;
      issue(OP_MAC, r * 7 % R, 1, pack(d, 1));
      n_single++;
    end
    // full scale: all-ones input against the all-ones row
    issue(OP_MAC, 127, 1, '1);
    // overwrite some rows and use them with the held input
    for (int r = 0; r < 8; r++) issue(OP_WRITE, r, 0, {8{$urandom}});
    for (int r = 0; r < 8; r++) issue(OP_MAC, r, 0, '0);
    for (int r = 0; r < 8; r++) issue(OP_READ, r, 0, '0);
    idle();
    repeat (6) @(posedge clk);

    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("mechanisms: write=%0d read=%0d mac_new_input=%0d mac_held_input=%0d single_mode=%0d back_to_back=%0d masked_ones=%0d full_scale=%0d",
             n_write, n_read, n_mac_load, n_mac_reuse, n_single, n_b2b, n_masked, n_full);
    checks++; if (n_write == 0)     begin failures++; $display("FAIL no write");  end
    checks++; if (n_read == 0)      begin failures++; $display("FAIL no read");   end
    checks++; if (n_mac_load == 0)  begin failures++; $display("FAIL no MAC with new input"); end
    checks++; if (n_mac_reuse == 0) begin failures++; $display("FAIL no MAC with held input"); end
    checks++; if (n_single == 0)    begin failures++; $display("FAIL no single-mode MAC run"); end
    checks++; if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back op"); end
    checks++; if (n_masked == 0)    begin failures++; $display("FAIL no IN=0 masking"); end
    checks++; if (n_full == 0)      begin failures++; $display("FAIL no full-scale sum"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
