// tb_acc_swe_util -- self-checking test of the SWE utility accelerator:
// compare (cond output), min, max and abs on random values and on signed
// zeros and NaN, with results checked one clock after the op.
module tb_acc_swe_util;
  import tb_fp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;

  acc_swe_util dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_op(input logic [3:0] o, input logic [31:0] a, input logic [31:0] b);
    @(negedge clk);
    en = 1; op = o; in0 = a; in1 = b;
    @(negedge clk);
    en = 0; op = 0;
  endtask
  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [31:0] a, b;
    logic [1:0] ec;
    int seen [4];
    for (int i = 0; i < 4; i++) seen[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      a = rnd_f();
      b = (n % 7 == 0) ? a : rnd_f();
      ec = (b2f(a) == b2f(b)) ? 2'd0 : (b2f(a) < b2f(b)) ? 2'd1 : 2'd2;
      seen[ec]++;
      do_op(4'd1, a, b);
      check($sformatf("cmp %h %h -> %0d", a, b, cond), cond == ec && !err);
      do_op(4'd2, a, b);
      check("min", out0 == ((b2f(a) <= b2f(b)) ? a : b) && out1 == out0 && cond == ec);
      do_op(4'd3, a, b);
      check("max", out0 == ((b2f(a) >= b2f(b)) ? a : b));
      do_op(4'd4, a, b);
      check("abs", b2f(out0) == ((b2f(a) < 0.0) ? -b2f(a) : b2f(a)));
    end
    check("all orders seen", seen[0] > 0 && seen[1] > 0 && seen[2] > 0);
    do_op(4'd1, 32'h8000_0000, 32'h0000_0000);
    check("-0 == +0", cond == 2'd0);
    do_op(4'd1, 32'h7FC0_0000, 32'h3F80_0000);
    check("nan unordered + error", cond == 2'd3 && err);
    @(negedge clk);
    check("error pulse ends, cond holds", !err && cond == 2'd3 && !stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
