// W-bit ripple-carry adder made of stacked full adders, the multi-bit adder
// used in the second and later layers of the bit-tree adder.
// Combinational: sum = a + b + cin, W+1 bits wide.
module rc_adder #(
  parameter int unsigned W = 2
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W:0]   sum
);
  logic [W:0] c;
  assign c[0] = cin;
  for (genvar i = 0; i < W; i++) begin : g_fa
    full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .s(sum[i]), .cout(c[i+1]));
  end
  assign sum[W] = c[W];
endmodule
