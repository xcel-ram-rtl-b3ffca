// One-bit full adder, the cell the bit-tree adder is built from.
// Purely combinational: {cout, s} = a + b + cin.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);
  assign s    = a ^ b ^ cin;
  assign cout = (a & b) | (cin & (a ^ b));
endmodule
