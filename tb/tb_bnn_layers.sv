// Workload testbench: one output neuron of every binarized layer of the
// CIFAR-10 BNN (Conv2..Conv6, FC1, FC2) computed in the full-size memory
// system, in the Proposal-A bank and in the Proposal-B bank.
//
// A neuron of a layer with kernel length L bits takes W = L / 64 word pairs.
// The testbench writes the activation and kernel words into the bank, issues
// one in-memory convolution per word (Proposal A: four output channels at
// once, Proposal B: one), adds the returned partial popcounts as the
// processor would and compares the sum and the output bit (popcount > L / 2)
// with a software reference.
//   Proposal A layout: up to 16 words per subarray; kernel of channel c,
//     word j at section c row j; activation word j at section j/8 row
//     16 + j%8 of the same subarray.
//   Proposal B layout: up to 64 words per subarray; activation word j at row
//     j, kernel word j at row 64 + j.
// Kernel lengths: Conv2/Conv3 3x3x128 = 1152, Conv4/Conv5 3x3x256 = 2304,
// Conv6 3x3x512 = 4608, FC1 8192, FC2 1024 bits.  Channels 0 and 2 are drawn
// close to the activation so that both output values occur.
module tb_bnn_layers;
  import xcel_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [14:0] avs_address = '0;
  logic avs_read = 0, avs_write = 0;
  logic [63:0] avs_writedata = '0, avs_readdata;
  logic avs_waitrequest, avs_readdatavalid;
  logic [1:0] avs_response;
  int n_fire = 0, n_quiet = 0, n_conv = 0;

  xcel_ram_system dut (.*);

  always #5 clk = ~clk;

  localparam int NL = 5;
  localparam string LNAME [NL] = '{"Conv2/Conv3", "Conv4/Conv5", "Conv6", "FC1", "FC2"};
  localparam int    LBITS [NL] = '{1152, 2304, 4608, 8192, 1024};
  localparam int    MAXW = 128;

  function automatic int xnor_pc(input logic [63:0] a, input logic [63:0] b);
    int n = 0;
    for (int i = 0; i < 64; i++) if (a[i] == b[i]) n++;
    return n;
  endfunction

  task automatic xfer(input bit rd, input bit conv, input int bank, input int word,
                      input logic [63:0] wd, output logic [63:0] rdata, output logic [1:0] resp);
    @(negedge clk);
    avs_address = {conv, 1'(bank), 13'(word)};
    avs_writedata = wd;
    avs_read = rd;
    avs_write = !rd;
    @(posedge clk);
    while (avs_waitrequest) @(posedge clk);
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
  endtask

  task automatic expect_eq(input string what, input logic [63:0] g, input logic [63:0] e);
    checks++;
    if (g !== e) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, g, e);
    end
  endtask

  // word address of activation / kernel word j in bank A and B
  function automatic int a_act(input int j);
    return (j / 16) * 128 + 32 * ((j % 16) / 8) + 16 + j % 8;
  endfunction
  function automatic int a_ker(input int c, input int j);
    return (j / 16) * 128 + 32 * c + j % 16;
  endfunction
  function automatic int b_act(input int j);
    return (j / 64) * 128 + j % 64;
  endfunction
  function automatic int b_ker(input int j);
    return (j / 64) * 128 + 64 + j % 64;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] act [MAXW];
    logic [63:0] ker [4][MAXW];
    logic [63:0] rd, wd;
    logic [1:0]  resp;
    int ref_pc [4], sum_a [4], sum_b;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      automatic int w = LBITS[l] / 64;
      automatic int t0 = $time;
      for (int j = 0; j < w; j++) begin
        act[j] = {$urandom, $urandom};
        for (int c = 0; c < 4; c++) begin
          ker[c][j] = {$urandom, $urandom};
          if (c % 2 == 0) ker[c][j] = act[j] ^ ({$urandom, $urandom} & {$urandom, $urandom});
        end
      end
      for (int c = 0; c < 4; c++) begin
        ref_pc[c] = 0;
        for (int j = 0; j < w; j++) ref_pc[c] += xnor_pc(act[j], ker[c][j]);
      end
      // load the layer's operands
      for (int j = 0; j < w; j++) begin
        wr(0, a_act(j), act[j]);
        for (int c = 0; c < 4; c++) wr(0, a_ker(c, j), ker[c][j]);
        wr(1, b_act(j), act[j]);
      end
      // Proposal A: four channels per command
      sum_a = '{default: 0};
      for (int j = 0; j < w; j++) begin
        wd = '0;
        for (int c = 0; c < 4; c++) wd[5 * c +: 5] = 5'(j % 16);
        wd[20 +: 4] = 4'hf;
        xfer(1, 1, 0, a_act(j), wd, rd, resp);
        n_conv++;
        expect_eq("bank A response", 64'(resp), 0);
        for (int c = 0; c < 4; c++) sum_a[c] += int'(rd[8 * c +: 7]);
      end
      // Proposal B: one channel per pass, kernel rows rewritten per channel
      for (int c = 0; c < 4; c++) begin
        for (int j = 0; j < w; j++) wr(1, b_ker(j), ker[c][j]);
        sum_b = 0;
        for (int j = 0; j < w; j++) begin
          xfer(1, 1, 1, b_act(j), 64'(b_ker(j)), rd, resp);
          n_conv++;
          expect_eq("bank B response", 64'(resp), 0);
          sum_b += int'(rd[6:0]);
        end
        expect_eq($sformatf("%s ch%0d popcount, bank B", LNAME[l], c), 64'(sum_b), 64'(ref_pc[c]));
        expect_eq($sformatf("%s ch%0d output, bank B", LNAME[l], c),
                  64'(2 * sum_b > LBITS[l]), 64'(2 * ref_pc[c] > LBITS[l]));
      end
      for (int c = 0; c < 4; c++) begin
        expect_eq($sformatf("%s ch%0d popcount, bank A", LNAME[l], c), 64'(sum_a[c]), 64'(ref_pc[c]));
        expect_eq($sformatf("%s ch%0d output, bank A", LNAME[l], c),
                  64'(2 * sum_a[c] > LBITS[l]), 64'(2 * ref_pc[c] > LBITS[l]));
        if (2 * ref_pc[c] > LBITS[l]) n_fire++; else n_quiet++;
      end
      $display("%-12s %5d bits  %3d words  popcounts %0d %0d %0d %0d  (%0d ns)",
               LNAME[l], LBITS[l], w, ref_pc[0], ref_pc[1], ref_pc[2], ref_pc[3], $time - t0);
    end
    checks++; if (n_fire == 0)  begin failures++; $display("FAIL no neuron fired"); end
    checks++; if (n_quiet == 0) begin failures++; $display("FAIL every neuron fired"); end
    $display("in-memory convolutions: %0d", n_conv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
