// Self-checking testbench of the behavioural section model: pseudo-read with
// the switches closed, isolation once they open, the XNOR-on-SL voltage of
// each half row, one level per dummy-cell pump in either direction, and the
// two sense amplifiers against their references.
module tb_cs_section_model;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic sw_closed, pseudo_read, rwl_a, rwl_b, pch0, pch1_b, wl_adc, sae, sa_n, sa_p;
  logic [63:0] act_row, kern_row;
  logic [1:0] vrefn, vrefp;
  real v_sl;

  cs_section_model dut (.*);

  always #5 clk = ~clk;

  function automatic int xnor_half(input logic [63:0] a, input logic [63:0] k, input int h);
    int n = 0;
    for (int i = 32 * h; i < 32 * h + 32; i++) if (a[i] == k[i]) n++;
    return n;
  endfunction

  task automatic expect_v(input string what, input real exp);
    checks++;
    if (v_sl > exp + 1e-9 || v_sl < exp - 1e-9) begin
      failures++;
      $display("FAIL %s: V_SL %f expected %f", what, v_sl, exp);
    end
  endtask

  task automatic expect_b(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %b expected %b", what, got, exp);
    end
  endtask

  task automatic cyc();
    @(posedge clk); #1;
    pseudo_read = 0; rwl_a = 0; rwl_b = 0; pch0 = 0; pch1_b = 1; wl_adc = 0; sae = 0;
  endtask

  task automatic pump(input bit up);
    if (up) pch1_b = 0; else pch0 = 1;
    cyc();
    wl_adc = 1;
    cyc();
  endtask

  task automatic sense(input logic [1:0] rn, input logic [1:0] rp);
    vrefn = rn; vrefp = rp; sae = 1;
    cyc();
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] a, k;
    sw_closed = 1; pseudo_read = 0; rwl_a = 0; rwl_b = 0; pch0 = 0; pch1_b = 1;
    wl_adc = 0; sae = 0; vrefn = 2'd3; vrefp = 2'd1; act_row = 0; kern_row = 0;
    cyc();
    for (int t = 0; t < 40; t++) begin
      int e;
      a = {$urandom, $urandom};
      k = {$urandom, $urandom};
      if (t == 0) k = a;       // all 64 agree
      if (t == 1) k = ~a;      // none agree
      // pseudo-read, then open the switches and disturb the shared line
      sw_closed = 1; act_row = a; pseudo_read = 1; cyc();
      sw_closed = 0; act_row = ~a; pseudo_read = 1; cyc();
      // half a
      kern_row = k; rwl_a = 1; cyc();
      e = xnor_half(a, k, 0);
      expect_v("half a", real'(e) / 32.0);
      // sense against VDD/4 and 3VDD/4
      sense(2'd3, 2'd1);
      expect_b("SA_N 3/4", sa_n, e > 24);
      expect_b("SA_P 1/4", sa_p, e >= 8);
      sense(2'd2, 2'd2);
      expect_b("SA_N 1/2", sa_n, e > 16);
      expect_b("SA_P 1/2", sa_p, e >= 16);
      // pump in twice, out once
      if (e <= 30) begin
        pump(1); expect_v("pump in", real'(e + 1) / 32.0);
        pump(1); expect_v("pump in 2", real'(e + 2) / 32.0);
        pump(0); expect_v("pump out", real'(e + 1) / 32.0);
      end else begin
        pump(0); expect_v("pump out", real'(e - 1) / 32.0);
      end
      // half b
      rwl_b = 1; cyc();
      e = xnor_half(a, k, 1);
      expect_v("half b", real'(e) / 32.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
