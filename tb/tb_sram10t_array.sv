// Self-checking testbench of the 10T array model: writes, single-row reads,
// two-row reads (wired-NOR bitlines), precharge with no wordline and the
// cell-state output, against a reference copy of the array kept here.
module tb_sram10t_array;
  localparam int ROWS = 128, COLS = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wwl;
  logic [6:0] waddr;
  logic [COLS-1:0] wdata, rbl, rblb, q_row0;
  logic [1:0] rwl;
  logic [6:0] raddr [2];
  logic [COLS-1:0] ref_mem [ROWS];

  sram10t_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;

  task automatic expect_eq(input string what, input logic [COLS-1:0] got, input logic [COLS-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wwl = 0; rwl = 0; waddr = 0; wdata = 0; raddr[0] = 0; raddr[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wwl = 1; waddr = 7'(r); wdata = {$urandom, $urandom};
      ref_mem[r] = wdata;
    end
    @(negedge clk) wwl = 0;
    // single-row reads
    for (int i = 0; i < 50; i++) begin
      automatic int r = $urandom_range(ROWS - 1);
      @(negedge clk);
      rwl = 2'b01; raddr[0] = 7'(r);
      #1 expect_eq("q_row0", q_row0, ref_mem[r]);
      @(negedge clk);
      rwl = 2'b00;
      expect_eq("rbl single", rbl, ~ref_mem[r]);
      expect_eq("rblb single", rblb, ref_mem[r]);
    end
    // two-row reads
    for (int i = 0; i < 50; i++) begin
      automatic int a = $urandom_range(ROWS - 1);
      automatic int b = $urandom_range(ROWS - 1);
      @(negedge clk);
      rwl = 2'b11; raddr[0] = 7'(a); raddr[1] = 7'(b);
      @(negedge clk);
      rwl = 2'b00;
      expect_eq("rbl dual = NOR", rbl, ~(ref_mem[a] | ref_mem[b]));
      expect_eq("rblb dual = AND", rblb, ref_mem[a] & ref_mem[b]);
    end
    // no wordline: both precharged
    @(negedge clk);
    expect_eq("precharge rbl", rbl, '1);
    expect_eq("precharge rblb", rblb, '1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
