// Proposal-B subarray: exact in-memory XNOR + popcount with two read
// wordlines, asymmetric sense amplifiers and a bit-tree adder.
//
// A convolution of rows A and B enables both of their read wordlines at once.
// Where the two bits agree only one of RBL/RBLB is discharged; where they
// differ both are.  In every column an SA_NAND (M_BL larger) gives A AND B and
// an SA_NOR (M_BLB larger) gives A NOR B; their OR is A XNOR B.  The 64
// XNOR bits feed a bit-tree adder whose output, popcount(A XNOR B) in 0..64,
// is read out of the array.  The array is not sectioned (sectioning does not
// apply to this scheme), and normal reads and writes use the same cells: a
// single-row read fires only SA_NAND, whose SA_OUT then equals the cell.
//
// Interface: one command per cycle, accepted when busy is low.
//   write  we + waddr + wdata, at the clock edge;
//   read   re + raddr  -> rvalid + rdata two cycles later;
//   conv   conv_start + addr_a + addr_b -> conv_done + pc two cycles later.
// Timing: cycle 0 enables the RWL(s) and the bitlines evaluate, cycle 1 fires
// the SAs and runs the bit-tree adder (1 ns and 0.3 ns in the published 45 nm
// circuit), the registered result appears in cycle 2.  busy covers cycle 1, so
// a new command can be issued every second cycle.
//
// From the paper: the two-RWL read, the AND/NOR sense amplifiers, the OR to
// XNOR and the full-adder tree.  This design's own: the two-cycle pipeline,
// the registered output and the command interface.
//
// Unused nets, on purpose: the complementary SA outputs nand_v and or_v are
// left open (only AND and NOR are needed), and the array's direct row-0 cell
// tap q_unused is a Proposal-A feature that this scheme does not use.
module xcel_b_subarray
  import xcel_pkg::*;
#(
  parameter int unsigned ROWS = SUB_ROWS,
  parameter int unsigned NCOL = COLS,
  localparam int unsigned AW  = $clog2(ROWS),
  localparam int unsigned PW  = $clog2(NCOL + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [NCOL-1:0] wdata,
  input  logic            re,
  input  logic [AW-1:0]   raddr,
  output logic [NCOL-1:0] rdata,
  output logic            rvalid,
  input  logic            conv_start,
  input  logic [AW-1:0]   addr_a,
  input  logic [AW-1:0]   addr_b,
  output logic            conv_done,
  output logic [PW-1:0]   pc,
  output logic            busy
);

  logic [1:0]      rwl;
  logic [AW-1:0]   ra [2];
  logic [NCOL-1:0] rbl, rblb;
  logic [NCOL-1:0] and_v, nand_v, or_v, nor_v, xnor_v;
  logic [PW-1:0]   count;
  logic [NCOL-1:0] q_unused;
  logic            sense_rd, sense_cv;   // cycle 1 of a read / of a conv
  logic            sae_nand, sae_nor;

  assign rwl[0] = (re || conv_start) && !busy;
  assign rwl[1] = conv_start && !busy;
  assign ra[0]  = conv_start ? addr_a : raddr;
  assign ra[1]  = addr_b;

  sram10t_array #(.ROWS(ROWS), .COLS(NCOL)) u_arr (
    .clk    (clk),
    .rst_n  (rst_n),
    .wwl    (we && !busy),
    .waddr  (waddr),
    .wdata  (wdata),
    .rwl    (rwl),
    .raddr  (ra),
    .rbl    (rbl),
    .rblb   (rblb),
    .q_row0 (q_unused)
  );

  assign sae_nand = sense_rd || sense_cv;
  assign sae_nor  = sense_cv;

  for (genvar c = 0; c < NCOL; c++) begin : g_col
    asym_sa #(.BL_STRONG(1'b1)) u_sa_nand (
      .sae(sae_nand), .rbl(rbl[c]), .rblb(rblb[c]), .sa_out(and_v[c]), .sa_outb(nand_v[c])
    );
    asym_sa #(.BL_STRONG(1'b0)) u_sa_nor (
      .sae(sae_nor), .rbl(rbl[c]), .rblb(rblb[c]), .sa_out(or_v[c]), .sa_outb(nor_v[c])
    );
  end

  // XNOR = AND | NOR
  assign xnor_v = and_v | nor_v;

  bit_tree_adder #(.N(NCOL)) u_bta (.in(xnor_v), .count(count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sense_rd  <= 1'b0;
      sense_cv  <= 1'b0;
      rvalid    <= 1'b0;
      conv_done <= 1'b0;
      rdata     <= '0;
      pc        <= '0;
    end else begin
      sense_cv  <= conv_start && !busy;
      sense_rd  <= re && !conv_start && !busy;
      rvalid    <= sense_rd;
      conv_done <= sense_cv;
      if (sense_rd) rdata <= and_v;
      if (sense_cv) pc    <= count;
    end
  end

  assign busy = sense_rd || sense_cv;

  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({we, re, conv_start}));
  a_no_cmd_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(we || re || conv_start));

endmodule
