// Control block and counter of the dual-stage ADC that reads the popcount of
// one half row (32 cells) off the source-line voltage of a Proposal-A section.
//
// First stage (2 MSBs, the sub-class): both SAs are fired with VREFN = 3VDD/4
// on SA_N and VREFP = VDD/4 on SA_P.  Both low gives SC1, both high SC4;
// otherwise both references are moved to VDD/2 and the SAs fired again: both
// high gives SC3, otherwise SC2.
// Second stage (the count): for SC1/SC2 SA_P is used with VREFP = VDD/4 or
// VDD/2 and charge is pumped into SL (PCH1_b low precharges the dummy RBL,
// then WL_ADC shares it); for SC3/SC4 SA_N is used with VREFN = VDD/2 or 3VDD/4
// and charge is pumped out (PCH0 discharges the dummy RBL, then WL_ADC).  Each
// iteration senses first and pumps only if the SA has not yet flipped, so the
// count is the number of pumps SL needed to cross the reference.  With one
// level per pump and Q = NHALF/4 levels per sub-class:
//   SC1: pc = Q - cnt   SC2: pc = 2Q - cnt   SC3: pc = 2Q + cnt   SC4: pc = 3Q + cnt
// The counter stops at Q (N/8 = 8 for N = 64).
//
// Interface: start (one cycle, SL settled) -> done (one cycle) with popcount
// pc (0..NHALF), sub-class sc and count cnt.  The SA outputs are taken to be
// valid in the cycle after a cycle with sae high.
// Timing: 2 cycles per comparison in the first stage (2 or 4 cycles), then
// 2 cycles per pump plus 2 for the final sense, plus 1 for done: at most
// 4 + 2*Q + 2 + 1 = 23 cycles for NHALF = 32.
//
// From the paper: the references, the sub-class rules, the choice of SA and of
// pump direction per sub-class, the signal names and the N/8 count.  This
// design's own: the state sequence, the sense-before-pump order, the
// count-to-popcount formulas, and driving PCH1_b active low as the PMOS drawn
// in the schematic (the text speaks of precharging when PCH1_b is HIGH).
module adc_ctrl
  import xcel_pkg::*;
#(
  parameter int unsigned NHALF = 32,
  localparam int unsigned Q    = NHALF / 4,
  localparam int unsigned CW   = $clog2(Q + 1),
  localparam int unsigned PW   = $clog2(NHALF + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  // sense amplifier outputs
  input  logic          sa_n,
  input  logic          sa_p,
  // controls to the SAs and dummy cells
  output logic          sae,
  output logic [1:0]    vrefn,
  output logic [1:0]    vrefp,
  output logic          pch0,
  output logic          pch1_b,
  output logic          wl_adc,
  // result
  output logic          busy,
  output logic          done,
  output subclass_e     sc,
  output logic [CW-1:0] cnt,
  output logic [PW-1:0] pc
);

  typedef enum logic [2:0] {
    S_IDLE, S_CMP1, S_DEC1, S_CMP2, S_DEC2, S_SENSE, S_PUMP, S_DONE
  } state_e;

  state_e    state, state_n;
  subclass_e sc_n;
  logic [CW-1:0] cnt_n;
  logic      pump_in;   // SC1/SC2 pump charge in, SC3/SC4 pump it out
  logic      flipped;

  assign pump_in = (sc == SC1) || (sc == SC2);
  assign flipped = pump_in ? sa_p : !sa_n;

  always_comb begin
    state_n = state;
    sc_n    = sc;
    cnt_n   = cnt;
    sae     = 1'b0;
    vrefn   = VREF_Q3;
    vrefp   = VREF_Q1;
    pch0    = 1'b0;
    pch1_b  = 1'b1;
    wl_adc  = 1'b0;
    unique case (state)
      S_IDLE: if (start) begin
        state_n = S_CMP1;
        cnt_n   = '0;
      end
      S_CMP1: begin
        sae     = 1'b1;
        state_n = S_DEC1;
      end
      S_DEC1: begin
        if (!sa_n && !sa_p)     begin sc_n = SC1; state_n = S_SENSE; end
        else if (sa_n && sa_p)  begin sc_n = SC4; state_n = S_SENSE; end
        else                          state_n = S_CMP2;
      end
      S_CMP2: begin
        sae     = 1'b1;
        vrefn   = VREF_Q2;
        vrefp   = VREF_Q2;
        state_n = S_DEC2;
      end
      S_DEC2: begin
        vrefn   = VREF_Q2;
        vrefp   = VREF_Q2;
        sc_n    = (sa_n && sa_p) ? SC3 : SC2;
        state_n = S_SENSE;
      end
      S_SENSE: begin
        sae = 1'b1;
        if (pump_in) pch1_b = 1'b0;
        else         pch0   = 1'b1;
        state_n = S_PUMP;
      end
      S_PUMP: begin
        if (flipped || cnt == CW'(Q)) state_n = S_DONE;
        else begin
          wl_adc  = 1'b1;
          cnt_n   = cnt + 1'b1;
          state_n = S_SENSE;
        end
      end
      S_DONE: state_n = S_IDLE;
      default: state_n = S_IDLE;
    endcase
    // second-stage references, held through the sense/pump loop
    if (state == S_SENSE || state == S_PUMP) begin
      unique case (sc)
        SC1: vrefp = VREF_Q1;
        SC2: vrefp = VREF_Q2;
        SC3: vrefn = VREF_Q2;
        SC4: vrefn = VREF_Q3;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      sc    <= SC1;
      cnt   <= '0;
    end else begin
      state <= state_n;
      sc    <= sc_n;
      cnt   <= cnt_n;
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  always_comb begin
    unique case (sc)
      SC1: pc = PW'(Q)     - PW'(cnt);
      SC2: pc = PW'(2 * Q) - PW'(cnt);
      SC3: pc = PW'(2 * Q) + PW'(cnt);
      SC4: pc = PW'(3 * Q) + PW'(cnt);
    endcase
  end

  // The counter never passes N/8.
  a_cnt_max: assert property (@(posedge clk) disable iff (!rst_n) cnt <= CW'(Q));
  // Charge is never pumped while the SAs are being fired.
  a_no_pump_sense: assert property (@(posedge clk) disable iff (!rst_n) !(wl_adc && sae));

endmodule
