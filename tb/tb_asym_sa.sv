// Self-checking testbench of the asymmetric sense amplifier model.  Both
// sizings see every bitline pair produced by a two-row read of bits a, b
// (RBL high only if no enabled cell holds 1, RBLB high only if none holds 0),
// plus the single-row reads and the SAE-low precharge state.
module tb_asym_sa;
  int checks = 0, failures = 0;
  logic sae, rbl, rblb;
  logic nand_out, nand_outb, nor_out, nor_outb;

  asym_sa #(.BL_STRONG(1'b1)) u_nand (.sae(sae), .rbl(rbl), .rblb(rblb), .sa_out(nand_out), .sa_outb(nand_outb));
  asym_sa #(.BL_STRONG(1'b0)) u_nor  (.sae(sae), .rbl(rbl), .rblb(rblb), .sa_out(nor_out),  .sa_outb(nor_outb));

  task automatic expect_eq(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // two-row reads
    for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++) begin
      sae  = 1'b1;
      rbl  = !(a == 1 || b == 1);
      rblb = !(a == 0 || b == 0);
      #1;
      expect_eq("SA_NAND out = AND",  nand_out,  logic'(a & b));
      expect_eq("SA_NAND outb = NAND", nand_outb, logic'(!(a & b)));
      expect_eq("SA_NOR out = OR",    nor_out,   logic'(a | b));
      expect_eq("SA_NOR outb = NOR",  nor_outb,  logic'(!(a | b)));
      expect_eq("XNOR", nand_out | nor_outb, logic'(a == b));
    end
    // single-row reads: both sizings read the cell
    for (int q = 0; q < 2; q++) begin
      rbl = !q; rblb = q; #1;
      expect_eq("read NAND", nand_out, logic'(q));
      expect_eq("read NOR",  nor_out,  logic'(q));
    end
    // precharge while SAE is low
    sae = 1'b0; rbl = 1'b0; rblb = 1'b1; #1;
    expect_eq("precharge out",  nand_out & nor_out, 1'b1);
    expect_eq("precharge outb", nand_outb & nor_outb, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
