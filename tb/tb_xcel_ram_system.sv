// End-to-end testbench of the Xcel-RAM memory system at its full size: one
// 64 KB Proposal-A bank and one 64 KB Proposal-B bank behind the Avalon-MM
// slave.  The testbench is the bus master (the processor's side of the bus).
//
// It runs:
//  * ordinary writes and reads in both banks, at the first and last words;
//  * Proposal-A convolutions of one activation against four kernels, with
//    rows chosen so that the half-row popcounts fall into all four ADC
//    sub-classes, and with sections masked off;
//  * Proposal-B convolutions of row pairs, and a pair across two subarrays,
//    which must come back with the SLVERR response;
//  * one binary neuron of a 3x3x128 convolution layer (1152-bit kernel = 18
//    words): the partial popcounts of the 18 word pairs are added and the
//    output bit is popcount > 576.  Bank A computes four output channels per
//    command, bank B one; both must agree with the reference.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_xcel_ram_system;
  import xcel_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [14:0] avs_address = '0;
  logic avs_read = 0, avs_write = 0;
  logic [63:0] avs_writedata = '0, avs_readdata;
  logic avs_waitrequest, avs_readdatavalid;
  logic [1:0] avs_response;

  // mechanism counters
  int n_wr = 0, n_rd = 0, n_conv_a = 0, n_conv_b = 0, n_err = 0, n_stall = 0, n_masked = 0;
  int n_sc [4];
  int n_neuron = 0;

  xcel_ram_system dut (.*);

  always #5 clk = ~clk;

  localparam int KWORDS = 18;     // 3 x 3 x 128 bits / 64

  function automatic int xnor_pc(input logic [63:0] a, input logic [63:0] b);
    int n = 0;
    for (int i = 0; i < 64; i++) if (a[i] == b[i]) n++;
    return n;
  endfunction

  function automatic int xnor_half(input logic [63:0] a, input logic [63:0] b, input int h);
    int n = 0;
    for (int i = 32 * h; i < 32 * h + 32; i++) if (a[i] == b[i]) n++;
    return n;
  endfunction

  function automatic int sc_of(input int p);
    if (p < 8)   return 0;
    if (p <= 16) return 1;
    if (p <= 24) return 2;
    return 3;
  endfunction

  task automatic xfer(input bit rd, input bit conv, input int bank, input int word,
                      input logic [63:0] wd, output logic [63:0] rdata, output logic [1:0] resp);
    @(negedge clk);
    avs_address = {conv, 1'(bank), 13'(word)};
    avs_writedata = wd;
    avs_read = rd;
    avs_write = !rd;
    @(posedge clk);
    while (avs_waitrequest) begin n_stall++; @(posedge clk); end
    @(negedge clk);
    avs_read = 0;
    avs_write = 0;
    rdata = '0;
    resp = '0;
    if (rd) begin
      while (!avs_readdatavalid) @(negedge clk);
      rdata = avs_readdata;
      resp = avs_response;
    end
  endtask

  task automatic wr(input int bank, input int word, input logic [63:0] d);
    logic [63:0] x; logic [1:0] r;
    xfer(0, 0, bank, word, d, x, r);
    n_wr++;
  endtask

  task automatic expect_eq(input string what, input logic [63:0] g, input logic [63:0] e);
    checks++;
    if (g !== e) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, g, e);
    end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] rd, act, wd, exp;
    logic [63:0] k [4];
    logic [1:0] resp;
    logic [63:0] nact [KWORDS];
    logic [63:0] nker [4][KWORDS];
    int sum_ref [4];
    int sum_a [4];
    int sum_b;
    n_sc = '{default: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- plain memory --------------------------------------------------
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < 8; i++) begin
        automatic int w = (i < 4) ? i : 8191 - i;
        wd = {$urandom, $urandom} ^ 64'(w);
        wr(b, w, wd);
        xfer(1, 0, b, w, '0, rd, resp);
        n_rd++;
        expect_eq("read back", rd, wd);
        expect_eq("read response", 64'(resp), 0);
      end
    end

    // ---- Proposal A: activation in subarray 5, four kernels -------------
    for (int t = 0; t < 16; t++) begin
      automatic int sub = 5;
      automatic int arow = 64 + 20;               // section 2, row 20
      automatic logic [3:0] mask = (t % 4 == 3) ? 4'b0101 : 4'hf;
      act = {$urandom, $urandom};
      wr(0, sub * 128 + arow, act);
      wd = '0;
      exp = '0;
      for (int s = 0; s < 4; s++) begin
        // flip 4*(s + 4*(t%2)) bits per half to sweep the popcount
        automatic int f = (4 * s + 16 * (t % 2) + t / 2) % 33;
        automatic logic [31:0] m = (f == 32) ? '1 : ((32'd1 << f) - 1);
        k[s] = act ^ {m, m};
        wr(0, sub * 128 + 32 * s + t, k[s]);
        wd[5 * s +: 5] = 5'(t);
        if (mask[s]) begin
          exp[8 * s +: 7] = 7'(xnor_pc(act, k[s]));
          n_sc[sc_of(xnor_half(act, k[s], 0))]++;
          n_sc[sc_of(xnor_half(act, k[s], 1))]++;
        end
      end
      wd[20 +: 4] = mask;
      if (mask != 4'hf) n_masked++;
      xfer(1, 1, 0, sub * 128 + arow, wd, rd, resp);
      n_conv_a++;
      expect_eq("bank A conv", rd, exp);
      expect_eq("bank A conv response", 64'(resp), 0);
    end

    // ---- Proposal B: pairs, and a pair the bank must refuse ------------
    for (int t = 0; t < 10; t++) begin
      automatic int sub = 63 - t;
      automatic logic [63:0] a = {$urandom, $urandom};
      automatic logic [63:0] b = {$urandom, $urandom};
      wr(1, sub * 128 + 7, a);
      wr(1, sub * 128 + 100, b);
      xfer(1, 1, 1, sub * 128 + 7, 64'(sub * 128 + 100), rd, resp);
      n_conv_b++;
      expect_eq("bank B conv", rd, 64'(xnor_pc(a, b)));
      expect_eq("bank B conv response", 64'(resp), 0);
    end
    xfer(1, 1, 1, 3 * 128 + 1, 64'(4 * 128 + 1), rd, resp);
    expect_eq("bank B cross-subarray SLVERR", 64'(resp), 2);
    if (resp == 2) n_err++;

    // ---- one binary neuron of a 3x3x128 layer ---------------------------
    for (int j = 0; j < KWORDS; j++) begin
      nact[j] = {$urandom, $urandom};
      for (int c = 0; c < 4; c++) begin
        nker[c][j] = {$urandom, $urandom};
        // bias channel 0 towards the activation so that its output bit is 1
        if (c == 0) nker[c][j] = nact[j] ^ ({$urandom, $urandom} & {$urandom, $urandom});
      end
    end
    for (int c = 0; c < 4; c++) begin
      sum_ref[c] = 0;
      for (int j = 0; j < KWORDS; j++) sum_ref[c] += xnor_pc(nact[j], nker[c][j]);
    end
    // bank A, subarray 9: kernel c word j at section c row j,
    // activation word j at section j/14 row 18 + j%14
    for (int j = 0; j < KWORDS; j++) begin
      wr(0, 9 * 128 + 32 * (j / 14) + 18 + j % 14, nact[j]);
      for (int c = 0; c < 4; c++) wr(0, 9 * 128 + 32 * c + j, nker[c][j]);
    end
    sum_a = '{default: 0};
    for (int j = 0; j < KWORDS; j++) begin
      wd = '0;
      for (int c = 0; c < 4; c++) wd[5 * c +: 5] = 5'(j);
      wd[20 +: 4] = 4'hf;
      xfer(1, 1, 0, 9 * 128 + 32 * (j / 14) + 18 + j % 14, wd, rd, resp);
      n_conv_a++;
      for (int c = 0; c < 4; c++) sum_a[c] += int'(rd[8 * c +: 7]);
    end
    for (int c = 0; c < 4; c++) begin
      expect_eq($sformatf("neuron channel %0d popcount, bank A", c), 64'(sum_a[c]), 64'(sum_ref[c]));
      expect_eq($sformatf("neuron channel %0d output, bank A", c),
                64'(sum_a[c] > KWORDS * 32), 64'(sum_ref[c] > KWORDS * 32));
    end
    // bank B, subarray 20: activation word j at row j, kernel 0 word j at row 64 + j
    for (int j = 0; j < KWORDS; j++) begin
      wr(1, 20 * 128 + j, nact[j]);
      wr(1, 20 * 128 + 64 + j, nker[0][j]);
    end
    sum_b = 0;
    for (int j = 0; j < KWORDS; j++) begin
      xfer(1, 1, 1, 20 * 128 + j, 64'(20 * 128 + 64 + j), rd, resp);
      n_conv_b++;
      sum_b += int'(rd[6:0]);
    end
    expect_eq("neuron channel 0 popcount, bank B", 64'(sum_b), 64'(sum_ref[0]));
    expect_eq("neuron channel 0 output, bank B", 64'(sum_b > KWORDS * 32), 64'(sum_ref[0] > KWORDS * 32));
    expect_eq("neuron channel 0 fires", 64'(sum_b > KWORDS * 32), 1);
    n_neuron++;

    // ---- a write issued while a convolution is outstanding must stall -----
    begin
      automatic logic [63:0] a = {$urandom, $urandom};
      automatic logic [63:0] b = {$urandom, $urandom};
      automatic logic [63:0] got_pc = '0;
      automatic int stalls0 = n_stall;
      wr(1, 2 * 128 + 1, a);
      wr(1, 2 * 128 + 2, b);
      @(negedge clk);
      avs_address = {1'b1, 1'b1, 13'(2 * 128 + 1)};
      avs_writedata = 64'(2 * 128 + 2);
      avs_read = 1;
      @(posedge clk);
      while (avs_waitrequest) @(posedge clk);
      @(negedge clk);
      avs_read = 0;
      avs_write = 1;
      avs_address = {1'b0, 1'b0, 13'd77};
      avs_writedata = 64'hfeed_face_0bad_cafe;
      fork
        begin
          @(posedge clk);
          while (avs_waitrequest) begin n_stall++; @(posedge clk); end
          @(negedge clk);
          avs_write = 0;
          n_wr++;
        end
        begin
          while (!avs_readdatavalid) @(posedge clk);
          got_pc = avs_readdata;
        end
      join
      n_conv_b++;
      expect_eq("conv result while write waited", got_pc, 64'(xnor_pc(a, b)));
      checks++;
      if (n_stall == stalls0) begin failures++; $display("FAIL write was not held off"); end
      xfer(1, 0, 0, 77, '0, rd, resp);
      n_rd++;
      expect_eq("stalled write landed", rd, 64'hfeed_face_0bad_cafe);
    end

    // ---- every mechanism happened ---------------------------------------
    $display("writes %0d reads %0d convA %0d convB %0d masked %0d SLVERR %0d stalls %0d neuron %0d",
             n_wr, n_rd, n_conv_a, n_conv_b, n_masked, n_err, n_stall, n_neuron);
    $display("ADC sub-classes SC1 %0d SC2 %0d SC3 %0d SC4 %0d", n_sc[0], n_sc[1], n_sc[2], n_sc[3]);
    foreach (n_sc[s]) begin
      checks++;
      if (n_sc[s] == 0) begin failures++; $display("FAIL sub-class SC%0d never exercised", s + 1); end
    end
    checks++; if (n_wr == 0 || n_rd == 0) begin failures++; $display("FAIL no plain access"); end
    checks++; if (n_conv_a == 0) begin failures++; $display("FAIL no Proposal-A conv"); end
    checks++; if (n_conv_b == 0) begin failures++; $display("FAIL no Proposal-B conv"); end
    checks++; if (n_masked == 0) begin failures++; $display("FAIL no masked section"); end
    checks++; if (n_err == 0) begin failures++; $display("FAIL no error response"); end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no waitrequest stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
