// tb_acc_swe_sqrt -- self-checking test of the SWE square-root unit: random
// positive inputs against real sqrt (within one ulp), the stall of a read
// issued while the root is computed (an RD issued 26 clocks after SQRT does
// not stall), and special cases (zero, a negative input with its error pulse).
module tb_acc_swe_sqrt;
  import tb_fp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;

  acc_swe_sqrt dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // issue DIV, then RD immediately; count the clocks RD is stalled
  task automatic divide(input logic [31:0] a, input logic [31:0] b, output int stalls);
    @(negedge clk);
    en = 1; op = 4'd1; in0 = a; in1 = b;
    @(negedge clk);
    op = 4'd2;
    stalls = 0;
    #1;
    while (stall) begin
      @(negedge clk);
      stalls++;
      #1;
    end
    @(negedge clk);
    en = 0; op = 0;
  endtask

  initial begin
    logic [31:0] a, b, e;
    int st;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      a = {1'b0, rnd_f()[30:0]};
      if (n % 3 == 0) a[30:23] = 8'(1 + $urandom_range(0, 250));
      divide(a, 0, st);
      e = f2b($sqrt(b2f(a)));
      check($sformatf("sqrt %h -> %h exp %h", a, out0, e), near(out0, e) && out1 == out0);
      check($sformatf("stalled %0d clocks", st), st == 25);
    end
    divide(32'h4080_0000, 0, st);
    check("sqrt 4 = 2", out0 == 32'h4000_0000);
    divide(32'h0000_0000, 0, st);
    check("sqrt 0 = 0", out0 == 32'h0000_0000 && st == 0 && !err);
    divide(32'hC080_0000, 0, st);
    check("sqrt -4 = nan with error", out0 == 32'h7FC0_0000 && err);
    @(negedge clk);
    check("error pulse", !err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
