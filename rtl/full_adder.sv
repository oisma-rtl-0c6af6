// full_adder: 1-bit full adder cell (the "F-Adder" of the parallel counter).
// Combinational: sum = a ^ b ^ cin, cout = majority(a, b, cin).
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  assign sum  = a ^ b ^ cin;
  assign cout = (a & b) | (a & cin) | (b & cin);
endmodule
