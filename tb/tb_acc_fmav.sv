// tb_acc_fmav -- self-checking test of the FMAV accelerator: random add, sub
// and multiply against real arithmetic (within one ulp, the units truncate),
// a SIFT-match distance (subtract, square, accumulate) over 64 features, the
// one-clock latency, and the NaN error pulse.
module tb_acc_fmav;
  import tb_fp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;

  acc_fmav dut (.*);
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
    logic [31:0] a, b, e;
    real dsum;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      a = rnd_f(); b = rnd_f();
      do_op(4'd1, a, b); e = f2b(b2f(a) + b2f(b));
      check($sformatf("add %h %h -> %h exp %h", a, b, out0, e), near(out0, e) && out1 == out0);
      do_op(4'd2, a, b); e = f2b(b2f(a) - b2f(b));
      check($sformatf("sub %h %h -> %h exp %h", a, b, out0, e), near(out0, e));
      do_op(4'd3, a, b); e = f2b(b2f(a) * b2f(b));
      check($sformatf("mul %h %h -> %h exp %h", a, b, out0, e), near(out0, e));
    end
    // SIFT-match kernel: d = sum (a_i - b_i)^2
    dsum = 0.0;
    do_op(4'd6, 0, 0);
    for (int i = 0; i < 64; i++) begin
      a = rnd_f(); b = rnd_f();
      dsum += (b2f(a) - b2f(b)) * (b2f(a) - b2f(b));
      do_op(4'd2, a, b);
      do_op(4'd4, 0, 0);
      do_op(4'd5, 0, 0);
    end
    do_op(4'd7, 0, 0);
    check($sformatf("sift distance %f exp %f", b2f(out0), dsum),
          (b2f(out0) - dsum) / dsum < 1e-4 && (dsum - b2f(out0)) / dsum < 1e-4);
    // latency: the result is in outreg right after the clock edge of the op
    @(negedge clk);
    en = 1; op = 4'd8; in0 = 32'h4049_0FDB; in1 = 0;
    @(posedge clk); #1;
    check("one-clock latency", out0 == 32'h4049_0FDB);
    @(negedge clk);
    en = 0; op = 0;
    // inf * 0 is NaN: err pulses one clock
    do_op(4'd3, 32'h7F80_0000, 32'h0000_0000);
    check("nan error", err == 1'b1 && out0 == 32'h7FC0_0000);
    @(negedge clk);
    check("error is a pulse", err == 1'b0);
    check("never stalls", stall == 1'b0 && cond == 2'b00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
