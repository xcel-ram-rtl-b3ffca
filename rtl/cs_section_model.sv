// Behavioural model of the analog part of one Proposal-A section: the
// charge stored on its read bitlines, the shared source-line (SL) of the
// enabled kernel row, the dummy bitcell that pumps charge into or out of
// SL, and the two voltage sense amplifiers SA_N and SA_P.  It is an analog
// circuit and this model is not synthesizable (it uses real numbers); it is
// sampled on the array clock.
//
// How it works (one section, N = 64 columns, VDD = 1.0):
//  * Pseudo-read: while the section switches are closed, a pseudo_read cycle
//    leaves the activation row A on the bitlines (RBL low where A = 1, RBLB
//    low where A = 0).  With the switches open the section keeps that charge.
//  * XNOR on SL: a cycle with rwl_a (rwl_b) enables the cells of the kernel
//    row K in columns 0..31 (32..63).  Each cell pulls SL up when its bit
//    XNOR the stored activation bit is 1 and down otherwise; the pulls add, and
//    with the boosted RWL the SL swing covers 0..VDD, so
//    V_SL = VDD * popcount(A XNOR K over the half) / 32.
//  * Dummy cell: with pch1_b low its RBL is precharged to VDD, with pch0 high
//    it is discharged to 0 (the later of the two counts).  A cycle with
//    wl_adc high then shares that charge with SL, moving V_SL by one level
//    (VDD/32) up or down, the amount a bitcell moves it in the XNOR step.
//  * Sense amplifiers: a cycle with sae high latches
//      sa_n = V_SL >  VREFN,   sa_p = V_SL >= VREFP,
//    with VREF = code * VDD/4 for the 2-bit codes vrefn/vrefp.
//
// Timing: all effects are taken at the rising clock edge that ends a cycle in
// which the control is high; sa_n/sa_p change at that edge.
//
// From the paper: the pseudo-read / XNOR-on-SL / popcount steps, the dual RWL,
// the dummy-cell pumping, the two SAs and their references.  This design's
// own: the ideal linear level step (the real pump shrinks every cycle), the
// tie-break of a level lying exactly on a reference (SA_P resolves it upwards,
// SA_N downwards), and the cycle-based sampling.  The published cell table
// (Fig. 2c, RBL/Q columns) and the XNOR table disagree about which case pulls
// SL up; the model follows the text, which states that a higher SL voltage
// means more ones in the XNORed vector.  (Lint reports the upper bits of the
// function's loop column index as unused; it is a plain int index.)
module cs_section_model #(
  parameter int unsigned COLS = 64
) (
  input  logic            clk,
  // bitline state of the section
  input  logic            sw_closed,     // section switches on the RBLs closed
  input  logic            pseudo_read,   // activation row read onto the RBLs
  input  logic [COLS-1:0] act_row,       // cells of the activation row
  // kernel row cells (gates of M1/M1') and its dual read wordlines
  input  logic [COLS-1:0] kern_row,
  input  logic            rwl_a,
  input  logic            rwl_b,
  // dummy cells
  input  logic            pch0,
  input  logic            pch1_b,
  input  logic            wl_adc,
  // sense amplifiers
  input  logic            sae,
  input  logic [1:0]      vrefn,
  input  logic [1:0]      vrefp,
  output logic            sa_n,
  output logic            sa_p,
  output real             v_sl
);

  localparam int unsigned HALF = COLS / 2;
  localparam real VDD  = 1.0;
  localparam real STEP = VDD / HALF;

  logic [COLS-1:0] act_q;     // activation held as bitline charge (1 = RBLB high)
  logic            dummy_hi;  // dummy RBL precharged to VDD (pump in)
  logic            dummy_lo;  // dummy RBL discharged to 0 (pump out)

  function automatic int unsigned xnor_count(input logic [COLS-1:0] a,
                                             input logic [COLS-1:0] k,
                                             input bit upper);
    int unsigned n = 0;
    for (int unsigned i = 0; i < HALF; i++) begin
      int unsigned c = upper ? i + HALF : i;
      if (a[c] == k[c]) n++;
    end
    return n;
  endfunction

  function automatic real clamp(input real v);
    if (v < 0.0) return 0.0;
    if (v > VDD) return VDD;
    return v;
  endfunction

  initial begin
    v_sl     = 0.0;
    act_q    = '0;
    dummy_hi = 1'b0;
    dummy_lo = 1'b0;
    sa_n     = 1'b0;
    sa_p     = 1'b0;
  end

  always @(posedge clk) begin
    if (sw_closed && pseudo_read) act_q <= act_row;

    // one dummy RBL: the last precharge or discharge decides its state
    if (!pch1_b) begin dummy_hi <= 1'b1; dummy_lo <= 1'b0; end
    if (pch0)    begin dummy_lo <= 1'b1; dummy_hi <= 1'b0; end

    if (rwl_a)
      v_sl <= VDD * real'(xnor_count(act_q, kern_row, 1'b0)) / real'(HALF);
    else if (rwl_b)
      v_sl <= VDD * real'(xnor_count(act_q, kern_row, 1'b1)) / real'(HALF);
    else if (wl_adc) begin
      if (dummy_hi && !dummy_lo) v_sl <= clamp(v_sl + STEP);
      if (dummy_lo && !dummy_hi) v_sl <= clamp(v_sl - STEP);
      dummy_hi <= 1'b0;   // the dummy RBL has given up its charge
      dummy_lo <= 1'b0;
    end

    if (sae) begin
      sa_n <= v_sl >  VDD * real'(vrefn) / 4.0;
      sa_p <= v_sl >= VDD * real'(vrefp) / 4.0;
    end
  end

endmodule
