// One 64 KB Xcel-RAM bank: 64 subarrays of 128 x 64 bits that serve normal
// 64-bit reads and writes and in-memory binary convolutions.
//
// The bank is built either from Proposal-A subarrays (charge sharing,
// sectioned, four kernels against one activation per command) or from
// Proposal-B subarrays (two-wordline XNOR with bit-tree adder, one pair of
// rows per command), chosen by the PROPOSAL parameter.  A word address is
// {subarray, row}; the operands of a convolution must lie in one subarray
// because they must share its bitlines.
//
// Command (req, taken when req_valid && req_ready):
//   OP_WRITE  write wdata at addr; no response.
//   OP_READ   response rdata = word at addr.
//   OP_CONV, Proposal A: addr = activation row; wdata[5s +: 5] = kernel row
//             inside section s of the same subarray, wdata[20 +: 4] = section
//             mask.  Response rdata[8s +: 7] = popcount(A XNOR Ks).
//   OP_CONV, Proposal B: addr = row A; wdata[12:0] = word address of row B.
//             Response rdata[6:0] = popcount(A XNOR B); err set and nothing
//             computed when B is in another subarray.
// Timing: one command at a time; the response comes when the subarray is done
// (read 1 or 2 cycles, conv 2 cycles for B, up to 54 cycles for A) plus one
// cycle of registering here.
//
// From the paper: 64 KB banks of subarrays holding both data and kernels, the
// convolution as an in-memory command carrying several addresses, the 128 x 64
// subarray.  This design's own: the address split, the operand field layout
// and the one-command-at-a-time protocol.
// Each subarray's busy output is left unused: the bank itself is busy for the
// whole of a command (req_ready low), which covers the subarray's busy time.
module xcel_bank
  import xcel_pkg::*;
#(
  parameter proposal_e   PROPOSAL = PROP_A,
  parameter int unsigned NSUB     = BANK_WORDS / SUB_ROWS,
  localparam int unsigned SW      = (NSUB > 1) ? $clog2(NSUB) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       req_valid,
  output logic       req_ready,
  input  bank_req_t  req,
  output logic       rsp_valid,
  output bank_rsp_t  rsp
);

  typedef enum logic [1:0] { K_IDLE, K_WAIT, K_ERR } kstate_e;

  kstate_e         state;
  logic [SW-1:0]   cur;
  logic            cur_conv;
  logic [SW-1:0]   sub;
  logic [ROW_W-1:0] row;
  logic            take;

  logic [COLS-1:0] s_rdata [NSUB];
  logic [NSUB-1:0] s_rvalid, s_done;
  logic [COLS-1:0] s_cres  [NSUB];   // convolution result, already packed

  function automatic logic [SW-1:0] sub_of(input logic [WADDR_W-1:0] a);
    return (NSUB > 1) ? SW'(a >> ROW_W) : '0;
  endfunction

  assign sub  = sub_of(req.addr);
  assign row  = ROW_W'(req.addr);
  assign take = req_valid && req_ready;
  assign req_ready = (state == K_IDLE);

  logic bad_pair;
  assign bad_pair = (PROPOSAL == PROP_B) && (req.op == OP_CONV) &&
                    (sub_of(req.wdata[WADDR_W-1:0]) != sub);

  for (genvar i = 0; i < NSUB; i++) begin : g_sub
    logic sel, s_we, s_re, s_cv;
    assign sel  = take && (sub == SW'(i));
    assign s_we = sel && (req.op == OP_WRITE);
    assign s_re = sel && (req.op == OP_READ);
    assign s_cv = sel && (req.op == OP_CONV) && !bad_pair;

    if (PROPOSAL == PROP_A) begin : g_a
      logic [SECTIONS-1:0][SROW_W-1:0] krow;
      logic [SECTIONS-1:0][PC_W-1:0]   pc;
      logic                             busy;
      assign krow = req.wdata[CONV_MASK_LSB-1:0];
      xcel_a_subarray u_sa (
        .clk        (clk),
        .rst_n      (rst_n),
        .we         (s_we),
        .waddr      (row),
        .wdata      (req.wdata),
        .re         (s_re),
        .raddr      (row),
        .rdata      (s_rdata[i]),
        .rvalid     (s_rvalid[i]),
        .conv_start (s_cv),
        .act_addr   (row),
        .krow       (krow),
        .sec_mask   (req.wdata[CONV_MASK_LSB +: SECTIONS]),
        .conv_done  (s_done[i]),
        .pc         (pc),
        .busy       (busy)
      );
      always_comb begin
        s_cres[i] = '0;
        for (int s = 0; s < SECTIONS; s++) s_cres[i][8*s +: PC_W] = pc[s];
      end
    end else begin : g_b
      logic [PC_W-1:0] pc;
      logic            busy;
      xcel_b_subarray u_sb (
        .clk        (clk),
        .rst_n      (rst_n),
        .we         (s_we),
        .waddr      (row),
        .wdata      (req.wdata),
        .re         (s_re),
        .raddr      (row),
        .rdata      (s_rdata[i]),
        .rvalid     (s_rvalid[i]),
        .conv_start (s_cv),
        .addr_a     (row),
        .addr_b     (ROW_W'(req.wdata[WADDR_W-1:0])),
        .conv_done  (s_done[i]),
        .pc         (pc),
        .busy       (busy)
      );
      assign s_cres[i] = COLS'(pc);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= K_IDLE;
      cur       <= '0;
      cur_conv  <= 1'b0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        K_IDLE: if (take && req.op != OP_WRITE) begin
          cur      <= sub;
          cur_conv <= (req.op == OP_CONV);
          state    <= bad_pair ? K_ERR : K_WAIT;
        end
        K_WAIT: begin
          if (!cur_conv && s_rvalid[cur]) begin
            rsp_valid <= 1'b1;
            rsp       <= '{rdata: s_rdata[cur], err: 1'b0};
            state     <= K_IDLE;
          end else if (cur_conv && s_done[cur]) begin
            rsp_valid <= 1'b1;
            rsp       <= '{rdata: s_cres[cur], err: 1'b0};
            state     <= K_IDLE;
          end
        end
        K_ERR: begin
          rsp_valid <= 1'b1;
          rsp       <= '{rdata: '0, err: 1'b1};
          state     <= K_IDLE;
        end
        default: state <= K_IDLE;
      endcase
    end
  end

  a_op_legal: assert property (@(posedge clk) disable iff (!rst_n)
    req_valid |-> req.op inside {OP_READ, OP_WRITE, OP_CONV});

endmodule
