// fa_cell: one-bit full adder, the unit cell of the SIMD adder chain.
// sum = a ^ b ^ cin, cout = majority(a, b, cin). Purely combinational.
module fa_cell (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  assign sum  = a ^ b ^ cin;
  assign cout = (a & b) | (a & cin) | (b & cin);
endmodule
