// Bit-tree adder: popcount of an N-bit vector built only from full adders.
//
// The XNORed row from the sense amplifiers enters at the leaves.  The first
// layer is made of single full adders, each adding three consecutive bits to a
// 2-bit count; the following layers add pairs of counts with ripple-carry
// adders of stacked full adders, each one bit wider than the last, until the
// last of about log2(N) layers delivers the popcount.
//
// The tree is described recursively: an N-bit vector is split into one bit,
// a lower part and an upper part of (N-1)/2 and the rest; the two parts are
// counted by smaller trees and summed by a ripple adder whose carry-in is the
// spare bit.  Three bits are therefore one full adder, so the leaves are the
// three-input full adders of the first layer.
//
// Interface and timing: purely combinational, in[N-1:0] to
// count[$clog2(N+1)-1:0].  For N = 64 the count is 7 bits wide, because a
// row of 64 ones counts to 64 (the published text calls the output 6 bits).
//
// Lint note: Verilator's lint pass reports cl/cr as undriven and in[N-1:1] as
// unused in the recursive node.  Both are driven and used by the two
// sub-trees; the report comes from how the lint pass walks the recursion.
// Simulation (exhaustive for N = 7, random for N = 64) and synthesis give
// the correct popcount.
module bit_tree_adder #(
  parameter int unsigned N = 64,
  localparam int unsigned W = $clog2(N + 1)
) (
  input  logic [N-1:0] in,
  output logic [W-1:0] count
);

  if (N == 1) begin : g_leaf1
    assign count = in;
  end else if (N == 2) begin : g_leaf2
    full_adder u_ha (.a(in[0]), .b(in[1]), .cin(1'b0), .s(count[0]), .cout(count[1]));
  end else if (N == 3) begin : g_leaf3
    full_adder u_fa (.a(in[0]), .b(in[1]), .cin(in[2]), .s(count[0]), .cout(count[1]));
  end else begin : g_node
    localparam int unsigned NL = (N - 1) / 2;
    localparam int unsigned NR = N - 1 - NL;
    localparam int unsigned WL = $clog2(NL + 1);
    localparam int unsigned WR = $clog2(NR + 1);   // WR >= WL
    logic [WL-1:0] cl;
    logic [WR-1:0] cr;
    logic [WR:0]   sum;
    bit_tree_adder #(.N(NL)) u_lo (.in(in[NL:1]),     .count(cl));
    bit_tree_adder #(.N(NR)) u_hi (.in(in[N-1:NL+1]), .count(cr));
    rc_adder #(.W(WR)) u_add (
      .a   (WR'(cl)),
      .b   (cr),
      .cin (in[0]),
      .sum (sum)
    );
    assign count = sum[W-1:0];
  end

endmodule
