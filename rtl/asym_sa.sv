// Behavioural model of the asymmetric differential sense amplifier.
//
// This is an analog circuit (a latch-type SA whose two input transistors
// M_BL and M_BLB are sized differently); the model reproduces its decision at
// logic level and is not meant for synthesis.  Inputs are the evaluated read
// bitlines as logic levels, 1 = still precharged.  When RBL and RBLB differ the
// SA resolves like an ordinary SA (SA_OUT follows RBLB).  When they are equal,
// as after a two-row read of differing bits (both discharged), the larger input
// transistor wins:
//   BL_STRONG = 1 (M_BL larger):  SA_OUT falls    -> SA_OUT = AND, SA_OUTB = NAND  ("SA_NAND")
//   BL_STRONG = 0 (M_BLB larger): SA_OUTB falls   -> SA_OUT = OR,  SA_OUTB = NOR   ("SA_NOR")
// While SAE is low the PMOS precharge devices hold both outputs high.
//
// From the paper: the sizing rule and the resulting AND/NAND and OR/NOR
// outputs.  This design's own: the logic-level abstraction of the bitline
// voltages and the resolution of the equal-input case when both lines stay
// precharged (no wordline enabled).
module asym_sa #(
  parameter bit BL_STRONG = 1'b1
) (
  input  logic sae,
  input  logic rbl,
  input  logic rblb,
  output logic sa_out,
  output logic sa_outb
);

  logic decide;

  always_comb begin
    if (rbl != rblb) decide = rblb;        // normal differential read
    else             decide = !BL_STRONG;  // tie broken by the larger device
    sa_out  = sae ? decide  : 1'b1;
    sa_outb = sae ? !decide : 1'b1;
  end

endmodule
