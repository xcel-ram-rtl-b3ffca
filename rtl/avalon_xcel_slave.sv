// Avalon memory-mapped slave that puts Xcel-RAM banks on the system bus and
// turns bus transfers into bank commands, including the in-memory
// convolution whose extra operand addresses travel on the data channel.
//
// Address map (word addresses, 64-bit data):
//   address = {conv, bank, word}
//   write               -> OP_WRITE of writedata at word of bank;
//   read,  conv = 0     -> OP_READ; readdata = the word;
//   read,  conv = 1     -> OP_CONV with word as the first operand and the
//                          further operand addresses in writedata (the bus is
//                          widened so that a read also carries writedata);
//                          readdata = the packed popcount(s).
// Avalon rules kept: a transfer is taken in a cycle with read or write high
// and waitrequest low; reads are pipelined with at most one outstanding, so
// waitrequest stays high from an accepted read until its readdatavalid;
// response = 2'b10 (SLVERR) when the bank flags operands it cannot combine,
// 2'b00 (OKAY) otherwise.  Writes complete when taken.
//
// From the paper: the Avalon memory-mapped bus and the passing of several
// addresses per in-memory instruction over its data channel.  This design's
// own: the address map, the single outstanding read and the error response.
module avalon_xcel_slave
  import xcel_pkg::*;
#(
  parameter int unsigned NBANK = 2,
  localparam int unsigned BW   = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned AVW  = 1 + BW + WADDR_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // Avalon-MM slave
  input  logic [AVW-1:0]         avs_address,
  input  logic                   avs_read,
  input  logic                   avs_write,
  input  logic [COLS-1:0]        avs_writedata,
  output logic                   avs_waitrequest,
  output logic [COLS-1:0]        avs_readdata,
  output logic                   avs_readdatavalid,
  output logic [1:0]             avs_response,
  // to the banks
  output logic [NBANK-1:0]       bank_req_valid,
  input  logic [NBANK-1:0]       bank_req_ready,
  output bank_req_t              bank_req,
  input  logic [NBANK-1:0]       bank_rsp_valid,
  input  bank_rsp_t              bank_rsp [NBANK]
);

  logic            conv;
  logic [BW-1:0]   bsel;
  logic            pending;   // a read is outstanding
  logic            take;

  assign conv = avs_address[AVW-1];
  assign bsel = (NBANK > 1) ? avs_address[WADDR_W +: BW] : '0;

  assign avs_waitrequest = pending || !bank_req_ready[bsel];
  assign take            = (avs_read || avs_write) && !avs_waitrequest;

  always_comb begin
    bank_req.op    = avs_write ? OP_WRITE : (conv ? OP_CONV : OP_READ);
    bank_req.addr  = avs_address[WADDR_W-1:0];
    bank_req.wdata = avs_writedata;
    bank_req_valid = '0;
    if (take) bank_req_valid[bsel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending           <= 1'b0;
      avs_readdatavalid <= 1'b0;
      avs_readdata      <= '0;
      avs_response      <= 2'b00;
    end else begin
      avs_readdatavalid <= 1'b0;
      if (take && avs_read) pending <= 1'b1;
      for (int b = 0; b < NBANK; b++) begin
        if (bank_rsp_valid[b]) begin
          pending           <= 1'b0;
          avs_readdatavalid <= 1'b1;
          avs_readdata      <= bank_rsp[b].rdata;
          avs_response      <= bank_rsp[b].err ? 2'b10 : 2'b00;
        end
      end
    end
  end

  // A master may not read and write in the same cycle.
  a_rd_wr: assert property (@(posedge clk) disable iff (!rst_n) !(avs_read && avs_write));
  // Only a pending read can be answered.
  a_rsp_pending: assert property (@(posedge clk) disable iff (!rst_n)
    (bank_rsp_valid != '0) |-> pending);
endmodule
