// Xcel-RAM memory system: compute-capable SRAM banks on an Avalon
// memory-mapped bus, the memory side of a von-Neumann machine whose
// processor issues in-memory binary-convolution instructions
// ("Xcel-Conv REG [adr1] [adr2]") instead of load/XNOR/popcount loops.
//
// Bank 0 .. NBANK_A-1 are built with Proposal-A subarrays (charge-sharing
// XNOR + popcount, dual-stage ADC, 4 sections: one activation against four
// kernels per command); the next NBANK_B banks with Proposal-B subarrays
// (two-wordline XNOR, asymmetric SAs, bit-tree adder: exact popcount of one
// pair of rows per command).  Each bank is 64 KB of 64-bit words and also
// serves ordinary reads and writes.  The processor and the instruction memory
// are outside this module; their bus side is the Avalon slave port below.
//
// Ports: Avalon-MM slave, 64-bit data, address {conv, bank, word} as described
// in avalon_xcel_slave; clk and an active-low asynchronous reset.
//
// From the paper: Xcel-RAM banks of 64 KB on an Avalon bus, in-memory
// convolution commands that carry several addresses, both proposals.  This
// design's own: holding a bank of each proposal side by side in one system
// (the published evaluation uses one kind at a time), the bank count and the
// address map.
//
// Lint note: rst_n is reported as used both asynchronously and synchronously.
// The flops use it only as an asynchronous reset; the synchronous use is the
// "disable iff (!rst_n)" of the simulation assertions in the sub-blocks.
module xcel_ram_system
  import xcel_pkg::*;
#(
  parameter int unsigned NBANK_A = 1,
  parameter int unsigned NBANK_B = 1,
  parameter int unsigned NSUB    = BANK_WORDS / SUB_ROWS,
  localparam int unsigned NBANK  = NBANK_A + NBANK_B,
  localparam int unsigned BW     = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned AVW    = 1 + BW + WADDR_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [AVW-1:0]  avs_address,
  input  logic            avs_read,
  input  logic            avs_write,
  input  logic [COLS-1:0] avs_writedata,
  output logic            avs_waitrequest,
  output logic [COLS-1:0] avs_readdata,
  output logic            avs_readdatavalid,
  output logic [1:0]      avs_response
);

  logic [NBANK-1:0] req_valid, req_ready, rsp_valid;
  bank_req_t        req;
  bank_rsp_t        rsp [NBANK];

  avalon_xcel_slave #(.NBANK(NBANK)) u_bus (
    .clk               (clk),
    .rst_n             (rst_n),
    .avs_address       (avs_address),
    .avs_read          (avs_read),
    .avs_write         (avs_write),
    .avs_writedata     (avs_writedata),
    .avs_waitrequest   (avs_waitrequest),
    .avs_readdata      (avs_readdata),
    .avs_readdatavalid (avs_readdatavalid),
    .avs_response      (avs_response),
    .bank_req_valid    (req_valid),
    .bank_req_ready    (req_ready),
    .bank_req          (req),
    .bank_rsp_valid    (rsp_valid),
    .bank_rsp          (rsp)
  );

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    xcel_bank #(
      .PROPOSAL ((b < NBANK_A) ? PROP_A : PROP_B),
      .NSUB     (NSUB)
    ) u_bank (
      .clk       (clk),
      .rst_n     (rst_n),
      .req_valid (req_valid[b]),
      .req_ready (req_ready[b]),
      .req       (req),
      .rsp_valid (rsp_valid[b]),
      .rsp       (rsp[b])
    );
  end

endmodule
