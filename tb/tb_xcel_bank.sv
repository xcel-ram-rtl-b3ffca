// Self-checking testbench of the Xcel-RAM bank, built once with Proposal-A and
// once with Proposal-B subarrays (4 subarrays each to keep it short).  It
// writes random words across all subarrays, reads them back, runs
// convolutions inside several subarrays, and checks the error response of a
// Proposal-B pair that spans two subarrays.  Expected popcounts are computed
// here from a reference copy of the memory.
module tb_xcel_bank;
  import xcel_pkg::*;
  localparam int NSUB = 4;
  localparam int WORDS = NSUB * 128;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [1:0] req_valid, req_ready, rsp_valid;
  bank_req_t  req [2];
  bank_rsp_t  rsp [2];
  logic [63:0] ref_mem [2][WORDS];
  int n_err = 0;

  xcel_bank #(.PROPOSAL(PROP_A), .NSUB(NSUB)) dut_a (
    .clk, .rst_n, .req_valid(req_valid[0]), .req_ready(req_ready[0]), .req(req[0]),
    .rsp_valid(rsp_valid[0]), .rsp(rsp[0]));
  xcel_bank #(.PROPOSAL(PROP_B), .NSUB(NSUB)) dut_b (
    .clk, .rst_n, .req_valid(req_valid[1]), .req_ready(req_ready[1]), .req(req[1]),
    .rsp_valid(rsp_valid[1]), .rsp(rsp[1]));

  always #5 clk = ~clk;

  function automatic int xnor_pc(input logic [63:0] a, input logic [63:0] b);
    int n = 0;
    for (int i = 0; i < 64; i++) if (a[i] == b[i]) n++;
    return n;
  endfunction

  // issue one command on bank b and, unless it is a write, wait for the answer
  task automatic cmd(input int b, input op_e op, input int addr, input logic [63:0] wd,
                     output bank_rsp_t r);
    @(negedge clk);
    req_valid[b] = 1;
    req[b] = '{op: op, addr: WADDR_W'(addr), wdata: wd};
    while (!req_ready[b]) @(negedge clk);
    @(negedge clk);
    req_valid[b] = 0;
    r = '0;
    if (op != OP_WRITE) begin
      while (!rsp_valid[b]) @(negedge clk);
      r = rsp[b];
    end
  endtask

  task automatic expect_eq(input string what, input logic [63:0] got, input logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank_rsp_t r;
    req_valid = 0;
    req[0] = '0; req[1] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      for (int w = 0; w < WORDS; w++) begin
        ref_mem[b][w] = {$urandom, $urandom};
        cmd(b, OP_WRITE, w, ref_mem[b][w], r);
      end
      for (int i = 0; i < 40; i++) begin
        automatic int w = $urandom_range(WORDS - 1);
        cmd(b, OP_READ, w, '0, r);
        expect_eq($sformatf("bank %0d read %0d", b, w), r.rdata, ref_mem[b][w]);
      end
    end
    // Proposal A: one activation against one kernel per section
    for (int t = 0; t < 20; t++) begin
      automatic int sub = $urandom_range(NSUB - 1);
      automatic int act = $urandom_range(127);
      automatic logic [63:0] wd = '0;
      automatic logic [63:0] exp = '0;
      automatic logic [3:0] mask = (t < 10) ? 4'hf : 4'($urandom_range(15));
      for (int s = 0; s < 4; s++) begin
        automatic int k = $urandom_range(31);
        wd[5 * s +: 5] = 5'(k);
        if (mask[s]) exp[8 * s +: 7] = 7'(xnor_pc(ref_mem[0][sub * 128 + act], ref_mem[0][sub * 128 + 32 * s + k]));
      end
      wd[20 +: 4] = mask;
      cmd(0, OP_CONV, sub * 128 + act, wd, r);
      expect_eq("bank A conv", r.rdata, exp);
      expect_eq("bank A conv err", 64'(r.err), 0);
    end
    // Proposal B: pairs inside one subarray
    for (int t = 0; t < 40; t++) begin
      automatic int sub = $urandom_range(NSUB - 1);
      automatic int a = sub * 128 + $urandom_range(127);
      automatic int b2 = sub * 128 + $urandom_range(127);
      cmd(1, OP_CONV, a, 64'(b2), r);
      expect_eq("bank B conv", r.rdata, 64'(xnor_pc(ref_mem[1][a], ref_mem[1][b2])));
      expect_eq("bank B conv err", 64'(r.err), 0);
    end
    // Proposal B: pair across subarrays is refused
    for (int t = 0; t < 5; t++) begin
      cmd(1, OP_CONV, 3, 64'(128 * (1 + t % 3) + 3), r);
      expect_eq("bank B cross-subarray err", 64'(r.err), 1);
      if (r.err) n_err++;
    end
    // memory still intact after the convolutions
    for (int w = 0; w < 20; w++) begin
      cmd(0, OP_READ, w * 25, '0, r);
      expect_eq("bank A read after conv", r.rdata, ref_mem[0][w * 25]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
