// accumulation_periphery: near-memory accumulation of one OISMA array. It
// turns the 256 sense-amplifier outputs of a row operation into the 9-bit
// binary number of ones (0..256), i.e. the dot product of the 32 BP8 input
// numbers with the 32 BP8 weights of the row, in tenths.
//
// Structure as in the paper: four 64-to-7 SC-to-binary converters, two 7-bit
// ripple-carry adders (8-bit results) and one 8-bit ripple-carry adder (9-bit
// result). Converter k takes columns 64k..64k+63 (this design's choice).
// Purely combinational; the caller registers inputs (the sense amplifiers
// latch) and may register the output.
module accumulation_periphery (
  input  logic [255:0] sc_bits,
  output logic [8:0]   sum
);
  logic [6:0] cv [4];
  logic [7:0] s01, s23;

  for (genvar k = 0; k < 4; k++) begin : g_cv
    sc_to_binary_64 u_cv (.sc_bits(sc_bits[64*k +: 64]), .count(cv[k]));
  end

  ripple_carry_adder #(.W(7)) u_add7_a (.a(cv[0]), .b(cv[1]), .sum(s01));
  ripple_carry_adder #(.W(7)) u_add7_b (.a(cv[2]), .b(cv[3]), .sum(s23));
  ripple_carry_adder #(.W(8)) u_add8   (.a(s01),   .b(s23),   .sum(sum));
endmodule
