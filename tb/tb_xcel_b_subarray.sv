// Self-checking testbench of the Proposal-B subarray: random rows written
// and read back, then two-row convolutions (including a row with itself and
// complementary rows) whose popcount is compared with popcount(A XNOR B)
// computed here, with the two-cycle latency checked.
module tb_xcel_b_subarray;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic we = 0, re = 0, conv_start = 0;
  logic [6:0] waddr, raddr, addr_a, addr_b;
  logic [63:0] wdata, rdata;
  logic rvalid, conv_done, busy;
  logic [6:0] pc;
  logic [63:0] ref_mem [128];

  xcel_b_subarray dut (.*);

  always #5 clk = ~clk;

  function automatic int xnor_pc(input logic [63:0] a, input logic [63:0] b);
    int n = 0;
    for (int i = 0; i < 64; i++) if (a[i] == b[i]) n++;
    return n;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = 0; raddr = 0; addr_a = 0; addr_b = 0; wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 128; r++) begin
      @(negedge clk);
      we = 1; waddr = 7'(r); wdata = {$urandom, $urandom};
      if (r == 1) wdata = ~ref_mem[0];
      ref_mem[r] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 60; i++) begin
      automatic int r = $urandom_range(127);
      @(negedge clk) re = 1; raddr = 7'(r);
      @(negedge clk) re = 0;
      checks++;
      if (rvalid) begin failures++; $display("FAIL read came back after one cycle"); end
      @(negedge clk);
      checks++;
      if (!rvalid || rdata !== ref_mem[r]) begin
        failures++;
        $display("FAIL read row %0d: %h expected %h", r, rdata, ref_mem[r]);
      end
    end
    for (int t = 0; t < 300; t++) begin
      int a, b, e;
      a = $urandom_range(127);
      b = $urandom_range(127);
      if (t == 0) begin a = 0; b = 1; end
      if (t == 1) begin a = 5; b = 5; end
      @(negedge clk) conv_start = 1; addr_a = 7'(a); addr_b = 7'(b);
      @(negedge clk) conv_start = 0;
      checks++;
      if (conv_done) begin failures++; $display("FAIL conv done after one cycle"); end
      @(negedge clk);
      e = xnor_pc(ref_mem[a], ref_mem[b]);
      checks++;
      if (!conv_done || int'(pc) != e) begin
        failures++;
        $display("FAIL conv %0d,%0d: done %b pc %0d expected %0d", a, b, conv_done, pc, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
