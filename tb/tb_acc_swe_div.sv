// tb_acc_swe_div -- self-checking test of the SWE divider: random quotients
// against real division (within one ulp), the stall of a read issued while the
// division runs, the exact latency (an RD issued 26 clocks after DIV does not
// stall), and special cases (x/0, 0/0 with its error pulse).
module tb_acc_swe_div;
  import tb_fp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;

  acc_swe_div dut (.*);
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
      a = rnd_f(); b = rnd_f();
      divide(a, b, st);
      e = f2b(b2f(a) / b2f(b));
      check($sformatf("div %h/%h -> %h exp %h", a, b, out0, e), near(out0, e) && out1 == out0);
      check($sformatf("stalled %0d clocks", st), st == 25);
    end
    divide(32'h3F80_0000, 32'h0000_0000, st);
    check("1/0 = inf", out0 == 32'h7F80_0000 && st == 0 && !err);
    divide(32'h0000_0000, 32'h0000_0000, st);
    check("0/0 = nan with error", out0 == 32'h7FC0_0000 && err);
    @(negedge clk);
    check("error pulse", !err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
