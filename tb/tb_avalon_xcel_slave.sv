// Self-checking testbench of the Avalon-MM slave.  Two stand-in banks inside
// the testbench accept commands when ready (readiness toggles at random) and
// answer reads and convolutions after a random delay with a value derived
// from the command, flagging an error for odd convolution operands.  The
// testbench acts as the bus master, holding each transfer while waitrequest
// is high, and checks the decoded command, the bank it went to, the returned
// data, the response code and that no second read is taken while one is out.
module tb_avalon_xcel_slave;
  import xcel_pkg::*;
  int checks = 0, failures = 0;
  int n_stall = 0;
  logic clk = 0, rst_n = 0;
  logic [14:0] avs_address;
  logic avs_read = 0, avs_write = 0;
  logic [63:0] avs_writedata, avs_readdata;
  logic avs_waitrequest, avs_readdatavalid;
  logic [1:0] avs_response;
  logic [1:0] bank_req_valid, bank_req_ready, bank_rsp_valid;
  bank_req_t bank_req;
  bank_rsp_t bank_rsp [2];
  bank_req_t last_req [2];
  int        got [2];
  int        delay [2];
  bit        busy_b [2];
  bit        outstanding = 0;   // the master's view: a read taken, no data yet
  int        n_overlap = 0;     // commands taken while a read was outstanding
  int        n_rdv = 0;

  avalon_xcel_slave #(.NBANK(2)) dut (.*);

  always #5 clk = ~clk;

  function automatic logic [63:0] answer(input bank_req_t q);
    return {q.wdata[31:0], 19'd0, q.addr} ^ {62'd0, q.op};
  endfunction

  for (genvar b = 0; b < 2; b++) begin : g_bank
    always @(posedge clk) begin
      bank_rsp_valid[b] <= 0;
      if (!busy_b[b]) bank_req_ready[b] <= ($urandom_range(3) != 0);
      if (bank_req_valid[b] && bank_req_ready[b]) begin
        last_req[b] <= bank_req;
        got[b]++;
        if (bank_req.op != OP_WRITE) begin
          busy_b[b] <= 1;
          bank_req_ready[b] <= 0;
          delay[b] <= $urandom_range(5);
        end
      end else if (busy_b[b]) begin
        if (delay[b] == 0) begin
          busy_b[b] <= 0;
          bank_rsp_valid[b] <= 1;
          bank_rsp[b].rdata <= answer(last_req[b]);
          bank_rsp[b].err <= (last_req[b].op == OP_CONV) && last_req[b].wdata[0];
        end else delay[b] <= delay[b] - 1;
      end
    end
  end

  // bus monitor: with one read outstanding the slave must take nothing else
  always @(posedge clk) if (rst_n) begin
    if (avs_readdatavalid) begin outstanding <= 0; n_rdv++; end
    if ((avs_read || avs_write) && !avs_waitrequest) begin
      if (outstanding && !avs_readdatavalid) n_overlap++;
      if (avs_read) outstanding <= 1;
    end
  end

  // master side: one transfer, held while waitrequest is high
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

  task automatic expect_eq(input string what, input logic [63:0] g, input logic [63:0] e);
    checks++;
    if (g !== e) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, g, e);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] rd;
    logic [1:0] resp;
    bank_req_ready = 0; bank_rsp_valid = 0; busy_b[0] = 0; busy_b[1] = 0;
    got[0] = 0; got[1] = 0; delay[0] = 0; delay[1] = 0;
    bank_rsp[0] = '0; bank_rsp[1] = '0;
    avs_address = 0; avs_writedata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic int kind = $urandom_range(2);      // 0 write, 1 read, 2 conv
      automatic int bank = $urandom_range(1);
      automatic int word = $urandom_range(8191);
      automatic int n0 = got[bank];
      automatic logic [63:0] wd = {$urandom, $urandom};
      bank_req_t e;
      xfer(kind != 0, kind == 2, bank, word, wd, rd, resp);
      repeat (2) @(negedge clk);
      e.op = (kind == 0) ? OP_WRITE : (kind == 2) ? OP_CONV : OP_READ;
      e.addr = 13'(word);
      e.wdata = wd;
      expect_eq("one command reached the bank", 64'(got[bank] - n0), 1);
      expect_eq("command op",   64'(last_req[bank].op), 64'(e.op));
      expect_eq("command addr", 64'(last_req[bank].addr), 64'(e.addr));
      if (kind != 1) expect_eq("command wdata", last_req[bank].wdata, wd);
      if (kind != 0) begin
        expect_eq("readdata", rd, answer(last_req[bank]));
        expect_eq("response", 64'(resp), (kind == 2 && wd[0]) ? 64'd2 : 64'd0);
      end
    end
    // back-to-back reads to the two banks: the second must wait for the
    // first one's data even though its bank is ready
    for (int t = 0; t < 40; t++) begin
      automatic int b0 = t % 2;
      automatic int r0 = n_rdv;
      @(negedge clk);
      avs_address = {1'b0, 1'(b0), 13'(t)};
      avs_read = 1;
      @(posedge clk);
      while (avs_waitrequest) begin n_stall++; @(posedge clk); end
      @(negedge clk);
      avs_address = {1'b0, 1'(1 - b0), 13'(t + 1)};
      @(posedge clk);
      while (avs_waitrequest) begin n_stall++; @(posedge clk); end
      @(negedge clk);
      avs_read = 0;
      repeat (12) @(negedge clk);
      expect_eq("two read data returned", 64'(n_rdv - r0), 2);
    end
    expect_eq("no command taken while a read is outstanding", 64'(n_overlap), 0);
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL waitrequest never stalled the master"); end
    $display("waitrequest stalls: %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
