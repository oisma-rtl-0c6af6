// parallel_counter: counts the ones among 16 stochastic-computing bits and
// gives the count as a 5-bit binary number (0..16).
//
// It is a network of 11 one-bit full adders and 7 half adders, wired as in
// the published counter schematic (cell names below follow its layout, row by
// row from the inputs):
//   row 1  fa1..fa5 take input bits 0-2, 3-5, 6-8, 9-11, 12-14.
//   row 2  ha_r1 = HA(sum fa5, bit 15); fa7 = FA(carry fa3, carry fa4,
//          carry ha3) with ha3 = HA(sum fa3, sum fa4); ha_r2 = HA(carry fa5,
//          carry ha_r1).
//   row 3  fa6 = FA(carry fa1, carry fa2, carry ha2) with
//          ha2 = HA(sum fa1, sum fa2).
//   row 4  ha4 = HA(sum ha3, sum ha_r1);
//          fa9 = FA(sum fa7, sum ha_r2, carry ha4);
//          fa8 = FA(carry fa7, carry ha_r2, carry fa9).
//   row 5  ha6 = HA(sum ha2, sum ha4)           -> count[0]
//          fa11 = FA(sum fa9, sum fa6, carry ha6) -> count[1]
//          fa10 = FA(sum fa8, carry fa6, carry fa11) -> count[2]
//          ha5 = HA(carry fa8, carry fa10)       -> count[3], count[4]
// Which signal is a sum and which a carry is taken from the schematic's
// colour legend. The direction of each horizontal carry link follows from
// the cells' input counts: a half adder already fed by two signals can only
// pass its carry on. Purely combinational.
module parallel_counter (
  input  logic [15:0] sc_bits,
  output logic [4:0]  count
);
  // row 1
  logic [5:1] s, c;   // sums / carries of fa1..fa5
  for (genvar i = 0; i < 5; i++) begin : g_row1
    full_adder u_fa (.a(sc_bits[3*i]), .b(sc_bits[3*i+1]), .cin(sc_bits[3*i+2]),
                     .sum(s[i+1]), .cout(c[i+1]));
  end

  // rows 2 and 3
  logic s_ha2, c_ha2, s_ha3, c_ha3, s_hr1, c_hr1, s_hr2, c_hr2;
  logic s_fa6, c_fa6, s_fa7, c_fa7;
  half_adder u_ha2  (.a(s[1]), .b(s[2]),     .sum(s_ha2), .cout(c_ha2));
  half_adder u_ha3  (.a(s[3]), .b(s[4]),     .sum(s_ha3), .cout(c_ha3));
  half_adder u_har1 (.a(s[5]), .b(sc_bits[15]), .sum(s_hr1), .cout(c_hr1));
  half_adder u_har2 (.a(c[5]), .b(c_hr1),    .sum(s_hr2), .cout(c_hr2));
  full_adder u_fa6  (.a(c[1]), .b(c[2]), .cin(c_ha2), .sum(s_fa6), .cout(c_fa6));
  full_adder u_fa7  (.a(c[3]), .b(c[4]), .cin(c_ha3), .sum(s_fa7), .cout(c_fa7));

  // row 4
  logic s_ha4, c_ha4, s_fa8, c_fa8, s_fa9, c_fa9;
  half_adder u_ha4 (.a(s_ha3), .b(s_hr1),                 .sum(s_ha4), .cout(c_ha4));
  full_adder u_fa9 (.a(s_fa7), .b(s_hr2), .cin(c_ha4),    .sum(s_fa9), .cout(c_fa9));
  full_adder u_fa8 (.a(c_fa7), .b(c_hr2), .cin(c_fa9),    .sum(s_fa8), .cout(c_fa8));

  // row 5 (outputs)
  logic c_ha6, c_fa10, c_fa11;
  half_adder u_ha6  (.a(s_ha2), .b(s_ha4),                  .sum(count[0]), .cout(c_ha6));
  full_adder u_fa11 (.a(s_fa9), .b(s_fa6), .cin(c_ha6),     .sum(count[1]), .cout(c_fa11));
  full_adder u_fa10 (.a(s_fa8), .b(c_fa6), .cin(c_fa11),    .sum(count[2]), .cout(c_fa10));
  half_adder u_ha5  (.a(c_fa8), .b(c_fa10),                 .sum(count[3]), .cout(count[4]));
endmodule
