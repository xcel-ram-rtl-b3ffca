// Self-checking testbench of the dual-stage ADC control block.  A small
// integer model of the source line stands in for the analog section: level
// L (0..32) means V_SL = L/32 VDD, a WL_ADC cycle after a PCH1_b (PCH0)
// precharge moves L by +1 (-1), and a SAE cycle latches
// SA_N = L/32 > VREFN and SA_P = L/32 >= VREFP.  For every popcount 0..32
// the testbench checks the converted popcount, the sub-class, that the
// count never exceeds N/8 = 8 and the conversion time (at most 23 cycles).
module tb_adc_ctrl;
  import xcel_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic sa_n, sa_p, sae, pch0, pch1_b, wl_adc, busy, done;
  logic [1:0] vrefn, vrefp;
  subclass_e sc;
  logic [3:0] cnt;
  logic [5:0] pc;
  int level;
  bit dummy_hi, dummy_lo;
  int sc_seen [4];

  adc_ctrl dut (.*);

  always #5 clk = ~clk;

  // source-line stand-in, in units of VDD/32
  always @(posedge clk) begin
    if (!pch1_b) begin dummy_hi <= 1; dummy_lo <= 0; end
    if (pch0)    begin dummy_lo <= 1; dummy_hi <= 0; end
    if (wl_adc) begin
      if (dummy_hi) level <= level + 1;
      if (dummy_lo) level <= level - 1;
      dummy_hi <= 0;
      dummy_lo <= 0;
    end
    if (sae) begin
      sa_n <= (level * 4) >  (int'(vrefn) * 32);
      sa_p <= (level * 4) >= (int'(vrefp) * 32);
    end
  end

  function automatic subclass_e exp_sc(input int p);
    if (p < 8)   return SC1;
    if (p <= 16) return SC2;
    if (p <= 24) return SC3;
    return SC4;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    sa_n = 0; sa_p = 0; dummy_hi = 0; dummy_lo = 0; level = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      for (int p = 0; p <= 32; p++) begin
        @(negedge clk);
        level = p;
        start = 1;
        @(negedge clk);
        start = 0;
        cycles = 1;
        while (!done) begin
          @(negedge clk);
          cycles++;
          checks++;
          if (cnt > 8) begin failures++; $display("FAIL count %0d above 8", cnt); end
        end
        checks++;
        if (int'(pc) != p) begin
          failures++;
          $display("FAIL popcount %0d converted as %0d (sc %s cnt %0d)", p, pc, sc.name(), cnt);
        end
        checks++;
        if (sc != exp_sc(p)) begin
          failures++;
          $display("FAIL popcount %0d sub-class %s", p, sc.name());
        end
        sc_seen[int'(sc)]++;
        checks++;
        if (cycles > 23) begin
          failures++;
          $display("FAIL popcount %0d took %0d cycles", p, cycles);
        end
        @(negedge clk);
        checks++;
        if (busy) begin failures++; $display("FAIL still busy"); end
      end
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (sc_seen[s] == 0) begin failures++; $display("FAIL sub-class %0d never seen", s + 1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
