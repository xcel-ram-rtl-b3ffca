// Proposal-A subarray: a sectioned 10T SRAM array that computes binary
// convolutions by charge sharing and reads them out with a dual-stage ADC.
//
// The 128 x 64 array is cut into 4 sections of 32 rows by switches on the
// read bitlines.  A convolution of one activation row A with up to four kernel
// rows K0..K3 (one in each section) runs as follows:
//   1. pseudo-read  switches closed, the RWL of A is enabled without firing the
//                   SAs, so every section's RBL/RBLB now hold A as charge;
//   2. sectioning   the switches open and each section keeps its own copy;
//   3. XNOR on SL   in every enabled section the RWL1a of its kernel row is
//                   raised, sharing charge of columns 0..31 with that row's SL;
//   4. ADC          each section's dual-stage ADC converts its SL voltage to
//                   the half-row popcount (all sections in parallel);
//   5. repeat 3-4 with RWL1b (columns 32..63) and add the two half counts.
// The result is popcount(A XNOR Ks) for every enabled section s, i.e. A*K0 ..
// A*K3 from a single precharge of the bitlines.  A may sit in any row,
// including a row of one of the computing sections.
// Normal reads and writes use the same array: a read enables one RWL with the
// switches closed and senses RBLB differentially.
//
// Interface: one command at a time, accepted when busy is low.
//   write  we + waddr + wdata, done at the clock edge;
//   read   re + raddr; rdata valid with rvalid one cycle later;
//   conv   conv_start + act_addr + krow[s] + sec_mask; conv_done pulses with
//          pc[s] (0..64, 0 for a masked-off section).
// Timing of a convolution: 1 pseudo-read cycle, then per half 1 share cycle,
// 1 ADC start cycle, the ADC time (at most 23 cycles) and 1 cycle to see all
// ADCs idle, then 1 cycle to deliver: at most 1 + 2*(1+1+23+1) + 1 = 54 cycles.
//
// From the paper: the sectioning, the step sequence, the dual RWL split of the
// row in halves, one ADC per section and the sum of the two half counts.  This
// design's own: the command interface, the cycle-level sequence and the
// placement of the switches at the section borders only.
//
// Unused nets, on purpose: each section's RBL bus s_rbl (reads sense RBLB),
// and the ADC's sub-class sc, counter cnt and the modelled SL voltage v_sl,
// which are kept as named nets for observation only.
module xcel_a_subarray
  import xcel_pkg::*;
#(
  parameter int unsigned NSEC  = SECTIONS,
  parameter int unsigned SROWS = SEC_ROWS,
  parameter int unsigned NCOL  = COLS,
  localparam int unsigned SRW  = $clog2(SROWS),
  localparam int unsigned SECW = (NSEC > 1) ? $clog2(NSEC) : 1,
  localparam int unsigned AW   = SECW + SRW,
  localparam int unsigned PW   = $clog2(NCOL + 1),
  localparam int unsigned HPW  = $clog2(NCOL / 2 + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // write
  input  logic                      we,
  input  logic [AW-1:0]             waddr,
  input  logic [NCOL-1:0]           wdata,
  // read
  input  logic                      re,
  input  logic [AW-1:0]             raddr,
  output logic [NCOL-1:0]           rdata,
  output logic                      rvalid,
  // binary convolution
  input  logic                      conv_start,
  input  logic [AW-1:0]             act_addr,
  input  logic [NSEC-1:0][SRW-1:0]  krow,
  input  logic [NSEC-1:0]           sec_mask,
  output logic                      conv_done,
  output logic [NSEC-1:0][PW-1:0]   pc,
  output logic                      busy
);

  typedef enum logic [2:0] {
    A_IDLE, A_PREAD, A_SHARE, A_GO, A_WAIT, A_FIN
  } astate_e;

  astate_e state;
  logic    half;                      // 0: RWL1a, 1: RWL1b
  logic [AW-1:0]            act_q;
  logic [NSEC-1:0][SRW-1:0] krow_q;
  logic [NSEC-1:0]          mask_q;
  logic [NSEC-1:0][HPW-1:0] pca;
  logic [SECW-1:0]          rd_sec;

  // per-section signals
  logic [NCOL-1:0] s_rbl   [NSEC];
  logic [NCOL-1:0] s_rblb  [NSEC];
  logic [NCOL-1:0] s_q     [NSEC];
  logic [NCOL-1:0] act_bus;           // shared bitlines during the pseudo-read
  logic [NSEC-1:0] a_busy, a_done;
  logic [HPW-1:0]  a_pc    [NSEC];
  logic            sw_closed;

  function automatic logic [SECW-1:0] sec_of(input logic [AW-1:0] a);
    return (NSEC > 1) ? SECW'(a >> SRW) : '0;
  endfunction

  assign sw_closed = (state == A_IDLE) || (state == A_PREAD);
  assign act_bus   = s_q[sec_of(act_q)];

  for (genvar s = 0; s < NSEC; s++) begin : g_sec
    logic [1:0]     rwl;
    logic [SRW-1:0] ra [2];
    logic           rwl_a, rwl_b;
    logic           sae, pch0, pch1_b, wl_adc, sa_n, sa_p;
    logic [1:0]     vrefn, vrefp;
    subclass_e      sc;
    logic [$clog2(NCOL/8+1)-1:0] cnt;
    real            v_sl;

    assign rwl_a = (state == A_SHARE) && mask_q[s] && !half;
    assign rwl_b = (state == A_SHARE) && mask_q[s] &&  half;

    always_comb begin
      ra[0] = SRW'(raddr);
      ra[1] = '0;
      rwl   = 2'b00;
      if (state == A_IDLE) begin
        rwl[0] = re && (sec_of(raddr) == SECW'(s));
      end else if (state == A_PREAD) begin
        ra[0]  = SRW'(act_q);
        rwl[0] = (sec_of(act_q) == SECW'(s));
      end else begin
        ra[0]  = krow_q[s];
        rwl[0] = rwl_a || rwl_b;
      end
    end

    sram10t_array #(.ROWS(SROWS), .COLS(NCOL)) u_arr (
      .clk    (clk),
      .rst_n  (rst_n),
      .wwl    (we && !busy && (sec_of(waddr) == SECW'(s))),
      .waddr  (SRW'(waddr)),
      .wdata  (wdata),
      .rwl    (rwl),
      .raddr  (ra),
      .rbl    (s_rbl[s]),
      .rblb   (s_rblb[s]),
      .q_row0 (s_q[s])
    );

    cs_section_model #(.COLS(NCOL)) u_sl (
      .clk         (clk),
      .sw_closed   (sw_closed),
      .pseudo_read (state == A_PREAD),
      .act_row     (act_bus),
      .kern_row    (s_q[s]),
      .rwl_a       (rwl_a),
      .rwl_b       (rwl_b),
      .pch0        (pch0),
      .pch1_b      (pch1_b),
      .wl_adc      (wl_adc),
      .sae         (sae),
      .vrefn       (vrefn),
      .vrefp       (vrefp),
      .sa_n        (sa_n),
      .sa_p        (sa_p),
      .v_sl        (v_sl)
    );

    adc_ctrl #(.NHALF(NCOL / 2)) u_adc (
      .clk    (clk),
      .rst_n  (rst_n),
      .start  ((state == A_GO) && mask_q[s]),
      .sa_n   (sa_n),
      .sa_p   (sa_p),
      .sae    (sae),
      .vrefn  (vrefn),
      .vrefp  (vrefp),
      .pch0   (pch0),
      .pch1_b (pch1_b),
      .wl_adc (wl_adc),
      .busy   (a_busy[s]),
      .done   (a_done[s]),
      .sc     (sc),
      .cnt    (cnt),
      .pc     (a_pc[s])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        pca[s] <= '0;
        pc[s]  <= '0;
      end else if (state == A_PREAD) begin
        pca[s] <= '0;
        pc[s]  <= '0;
      end else if (a_done[s]) begin
        if (!half) pca[s] <= a_pc[s];
        else       pc[s]  <= PW'(pca[s]) + PW'(a_pc[s]);
      end
    end
  end

  // command sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= A_IDLE;
      half   <= 1'b0;
      act_q  <= '0;
      krow_q <= '0;
      mask_q <= '0;
      rd_sec <= '0;
      rvalid <= 1'b0;
    end else begin
      rvalid <= 1'b0;
      unique case (state)
        A_IDLE: begin
          if (conv_start) begin
            act_q  <= act_addr;
            krow_q <= krow;
            mask_q <= sec_mask;
            half   <= 1'b0;
            state  <= A_PREAD;
          end else if (re) begin
            rd_sec <= sec_of(raddr);
            rvalid <= 1'b1;
          end
        end
        A_PREAD: state <= A_SHARE;
        A_SHARE: state <= A_GO;
        A_GO:    state <= A_WAIT;
        A_WAIT: if (a_busy == '0) begin
          if (!half) begin
            half  <= 1'b1;
            state <= A_SHARE;
          end else begin
            state <= A_FIN;
          end
        end
        A_FIN:   state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end

  assign busy      = (state != A_IDLE);
  assign conv_done = (state == A_FIN);
  // differential read: RBLB stays high where the cell holds 1
  assign rdata     = s_rblb[rd_sec];

  // Only one command per cycle, and none while a convolution runs.
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({we, re, conv_start}));
  a_no_cmd_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(we || re || conv_start));

endmodule
