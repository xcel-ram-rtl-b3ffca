// Self-checking testbench of the bit-tree adder: random and corner vectors for
// the 64-input tree, and every input pattern of a 7-input tree, compared with
// a loop count of the ones.
module tb_bit_tree_adder;
  int checks = 0, failures = 0;

  logic [63:0] in64;
  logic [6:0]  cnt64;
  logic [6:0]  in7;
  logic [2:0]  cnt7;

  bit_tree_adder #(.N(64)) dut64 (.in(in64), .count(cnt64));
  bit_tree_adder #(.N(7))  dut7  (.in(in7),  .count(cnt7));

  function automatic int ones(input logic [63:0] v);
    int n = 0;
    for (int i = 0; i < 64; i++) n += int'(v[i]);
    return n;
  endfunction

  task automatic check64(input logic [63:0] v);
    in64 = v;
    #1;
    checks++;
    if (int'(cnt64) != ones(v)) begin
      failures++;
      $display("FAIL in=%h count=%0d expected=%0d", v, cnt64, ones(v));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check64('0);
    check64('1);
    for (int i = 0; i < 64; i++) check64(64'd1 << i);
    for (int i = 0; i < 64; i++) check64(~(64'd1 << i));
    for (int i = 0; i < 2000; i++) check64({$urandom, $urandom});
    for (int v = 0; v < 128; v++) begin
      in7 = 7'(v);
      #1;
      checks++;
      if (int'(cnt7) != ones(64'(v))) begin
        failures++;
        $display("FAIL 7-input in=%b count=%0d", in7, cnt7);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
