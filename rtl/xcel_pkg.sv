// Shared constants and types of the Xcel-RAM in-memory binary-convolution SRAM.
//
// The array geometry follows the published design: 64-bit rows (N = 64), a
// row split into two 32-bit halves by the dual read-wordline (RWL1a/RWL1b),
// 32-row sections with 4 sections per charge-sharing subarray, 128-row
// subarrays, and a 64 KB bank.  The bank command bundle (op code, word address,
// write data that also carries the extra operand addresses of an in-memory
// convolution) and its field layout are this design's own choice.
package xcel_pkg;

  // Row width N and the half-row seen by one read-wordline of the pair.
  localparam int unsigned COLS      = 64;
  localparam int unsigned HALF      = COLS / 2;
  // Popcount of a full row: 0..64 needs 7 bits.
  localparam int unsigned PC_W      = $clog2(COLS + 1);

  // Proposal-A sectioned subarray: 4 sections of 32 rows.
  localparam int unsigned SECTIONS  = 4;
  localparam int unsigned SEC_ROWS  = 32;
  localparam int unsigned SROW_W    = $clog2(SEC_ROWS);
  // Subarray of 128 rows x 64 columns (both proposals).
  localparam int unsigned SUB_ROWS  = SECTIONS * SEC_ROWS;
  localparam int unsigned ROW_W     = $clog2(SUB_ROWS);

  // 64 KB bank = 8192 words of 64 bits = 64 subarrays of 128 rows.
  localparam int unsigned BANK_BYTES = 64 * 1024;
  localparam int unsigned BANK_WORDS = BANK_BYTES / (COLS / 8);
  localparam int unsigned WADDR_W    = $clog2(BANK_WORDS);

  // Second stage of the ADC counts at most N/8 = 8 pump cycles.
  localparam int unsigned ADC_MAX_CNT = COLS / 8;

  // Which of the two in-memory computing schemes a bank is built with.
  typedef enum logic {
    PROP_A = 1'b0,   // charge sharing on SL + dual-stage ADC + sectioning
    PROP_B = 1'b1    // two RWLs + asymmetric SAs + bit-tree adder
  } proposal_e;

  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_WRITE = 2'd1,
    OP_CONV  = 2'd2   // XNOR + popcount of two (or 1 + 4) stored rows
  } op_e;

  // First-stage ADC sub-class of the SL voltage.
  typedef enum logic [1:0] {
    SC1 = 2'd0,      // [0, VDD/4)
    SC2 = 2'd1,      // [VDD/4, VDD/2]
    SC3 = 2'd2,      // (VDD/2, 3VDD/4]
    SC4 = 2'd3       // (3VDD/4, VDD]
  } subclass_e;

  // Reference voltage selection fed to SA_N / SA_P.
  typedef enum logic [1:0] {
    VREF_Q1  = 2'd1, // VDD/4
    VREF_Q2  = 2'd2, // VDD/2
    VREF_Q3  = 2'd3  // 3VDD/4
  } vref_e;

  // Field layout of wdata for OP_CONV.
  //   Proposal A: [5*s +: 5] kernel row inside section s, [20 +: 4] section mask.
  //   Proposal B: [0 +: WADDR_W] word address of the second operand row.
  localparam int unsigned CONV_MASK_LSB = SECTIONS * SROW_W;

  typedef struct packed {
    op_e                 op;
    logic [WADDR_W-1:0]  addr;
    logic [COLS-1:0]     wdata;
  } bank_req_t;

  typedef struct packed {
    logic [COLS-1:0]     rdata;
    logic                err;    // operands not on the same bitlines
  } bank_rsp_t;

endpackage
