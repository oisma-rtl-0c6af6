// ripple_carry_adder: W-bit unsigned adder with a (W+1)-bit result, built as
// a chain of full_adder cells. The accumulation periphery uses it for its
// 5-, 6-, 7- and 8-bit adders; the ripple-carry structure follows the paper,
// which picks it for its low energy. Combinational.
module ripple_carry_adder #(
  parameter int unsigned W = 5
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W:0]   sum
);
  logic [W:0] c;
  assign c[0] = 1'b0;
  for (genvar i = 0; i < W; i++) begin : g_bit
    full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
  end
  assign sum[W] = c[W];
endmodule
