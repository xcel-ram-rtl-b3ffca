// Self-checking testbench of the Proposal-A sectioned subarray.  It fills the
// 128 x 64 array with random rows, reads them back, and runs convolutions of a
// random activation row against one kernel row in each of the four sections
// (random section masks, activation in any section), comparing every
// section's popcount with popcount(A XNOR K) computed here and checking that
// a convolution takes at most 54 cycles.
module tb_xcel_a_subarray;
  import xcel_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic we = 0, re = 0, conv_start = 0;
  logic [6:0] waddr, raddr, act_addr;
  logic [63:0] wdata, rdata;
  logic rvalid, conv_done, busy;
  logic [3:0][4:0] krow;
  logic [3:0] sec_mask;
  logic [3:0][6:0] pc;
  logic [63:0] ref_mem [128];
  int max_cycles = 0;

  xcel_a_subarray dut (.*);

  always #5 clk = ~clk;

  function automatic int xnor_pc(input logic [63:0] a, input logic [63:0] b);
    int n = 0;
    for (int i = 0; i < 64; i++) if (a[i] == b[i]) n++;
    return n;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = 0; raddr = 0; act_addr = 0; wdata = 0; krow = 0; sec_mask = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 128; r++) begin
      @(negedge clk);
      we = 1; waddr = 7'(r); wdata = {$urandom, $urandom};
      // rows whose popcount against row 0 lands on every sub-class border
      if (r >= 1 && r <= 33) wdata = ref_mem[0] ^ ((64'd1 << (2 * (r - 1))) - 1);
      ref_mem[r] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 40; i++) begin
      automatic int r = $urandom_range(127);
      @(negedge clk) re = 1; raddr = 7'(r);
      @(negedge clk) re = 0;
      checks++;
      if (!rvalid || rdata !== ref_mem[r]) begin
        failures++;
        $display("FAIL read row %0d: %h expected %h", r, rdata, ref_mem[r]);
      end
    end
    for (int t = 0; t < 120; t++) begin
      int a, cycles;
      a = (t < 40) ? 0 : $urandom_range(127);
      @(negedge clk);
      act_addr = 7'(a);
      for (int s = 0; s < 4; s++) krow[s] = (t < 40) ? 5'((t + 8 * s) % 32) : 5'($urandom_range(31));
      sec_mask = (t % 5 == 4) ? 4'($urandom_range(15)) : 4'hf;
      conv_start = 1;
      @(negedge clk);
      conv_start = 0;
      cycles = 1;
      while (!conv_done) begin
        @(negedge clk);
        cycles++;
      end
      if (cycles > max_cycles) max_cycles = cycles;
      for (int s = 0; s < 4; s++) begin
        int e;
        e = sec_mask[s] ? xnor_pc(ref_mem[a], ref_mem[32 * s + int'(krow[s])]) : 0;
        checks++;
        if (int'(pc[s]) != e) begin
          failures++;
          $display("FAIL conv act %0d section %0d row %0d: pc %0d expected %0d", a, s, krow[s], pc[s], e);
        end
      end
      checks++;
      if (cycles > 54) begin
        failures++;
        $display("FAIL convolution took %0d cycles", cycles);
      end
    end
    $display("longest convolution: %0d cycles", max_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
