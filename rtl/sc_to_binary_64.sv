// sc_to_binary_64: 64-bit stochastic-to-binary converter. Counts the ones of
// 64 SC bits into a 7-bit binary number (0..64).
//
// Structure as in the paper: four 16-bit parallel counters (5-bit results),
// two 5-bit ripple-carry adders (6-bit results) and one 6-bit ripple-carry
// adder (7-bit result). Counter k takes bits 16k..16k+15; this assignment is
// this design's choice. Purely combinational.
module sc_to_binary_64 (
  input  logic [63:0] sc_bits,
  output logic [6:0]  count
);
  logic [4:0] pc [4];
  logic [5:0] s01, s23;

  for (genvar k = 0; k < 4; k++) begin : g_pc
    parallel_counter u_pc (.sc_bits(sc_bits[16*k +: 16]), .count(pc[k]));
  end

  ripple_carry_adder #(.W(5)) u_add5_a (.a(pc[0]), .b(pc[1]), .sum(s01));
  ripple_carry_adder #(.W(5)) u_add5_b (.a(pc[2]), .b(pc[3]), .sum(s23));
  ripple_carry_adder #(.W(6)) u_add6   (.a(s01),   .b(s23),   .sum(count));
endmodule
