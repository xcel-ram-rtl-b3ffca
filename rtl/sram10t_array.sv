// Array of 10T SRAM cells, modelled at the level of its bitlines.
//
// Each cell has a 6T write port (WWL, BL, BLB) and a decoupled differential
// read port: with RBL/RBLB precharged and SL grounded, an enabled read
// wordline discharges RBL when the cell holds 1 and RBLB when it holds 0.
// Because the read port cannot disturb the cell, two read wordlines may be
// enabled together; a bitline then stays high only if no enabled cell pulls it
// down (a wired NOR), which is what the Proposal-B XNOR sensing relies on.
//
// Timing: a write takes effect at the clock edge.  Read wordlines enabled in
// cycle t give the evaluated rbl/rblb levels in cycle t+1 (1 = still
// precharged).  A cycle with no read wordline leaves both lines precharged.
// q_row0 shows the stored row addressed by read port 0 without touching the
// bitlines; the charge-sharing scheme uses it as the gate state of the
// M1/M1' transistors of the kernel row.
//
// From the paper: the cell behaviour, precharge to VDD and the two-wordline
// read.  This design's own: the clocked, two-port abstraction and read-old-data
// on a same-cycle write.
module sram10t_array #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 64,
  localparam int unsigned AW  = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // write port (WWL + BL/BLB drivers)
  input  logic            wwl,
  input  logic [AW-1:0]   waddr,
  input  logic [COLS-1:0] wdata,
  // two read-wordline ports
  input  logic [1:0]      rwl,
  input  logic [AW-1:0]   raddr [2],
  // evaluated bitlines, 1 = still precharged
  output logic [COLS-1:0] rbl,
  output logic [COLS-1:0] rblb,
  // cell state of the row at raddr[0]
  output logic [COLS-1:0] q_row0
);

  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] q0, q1, pull_rbl, pull_rblb;

  assign q0 = mem[raddr[0]];
  assign q1 = mem[raddr[1]];
  assign q_row0 = q0;

  // RBL is pulled down by an enabled cell storing 1, RBLB by one storing 0.
  assign pull_rbl  = ({COLS{rwl[0]}} & q0)  | ({COLS{rwl[1]}} & q1);
  assign pull_rblb = ({COLS{rwl[0]}} & ~q0) | ({COLS{rwl[1]}} & ~q1);

  always_ff @(posedge clk) begin
    if (wwl) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbl  <= '1;
      rblb <= '1;
    end else begin
      rbl  <= ~pull_rbl;
      rblb <= ~pull_rblb;
    end
  end

endmodule
