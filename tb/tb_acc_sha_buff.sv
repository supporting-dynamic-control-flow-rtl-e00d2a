// tb_acc_sha_buff -- self-checking test of SHA-Buff: fills the buffer to full
// (stall on a further push), drains it in order (stall on an empty pop),
// interleaves random pushes and pops against a queue model, checks CLR, and
// builds words from 32-bit halves with STAGE and PUSHH.
module tb_acc_sha_buff;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;
  logic [63:0] q [$];

  localparam int D = 16;
  acc_sha_buff #(.DEPTH(D)) dut (.*);
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

  // one op; returns whether it stalled (and so did nothing)
  task automatic do_op(input logic [3:0] o, input logic [63:0] d, output logic st);
    @(negedge clk);
    en = 1; op = o; in0 = d[31:0]; in1 = d[63:32];
    #1 st = stall;
    @(negedge clk);
    en = 0; op = 0;
  endtask

  initial begin
    logic st;
    logic [63:0] d, e;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check("empty after reset", cond == 2'b01);
    do_op(4'd2, 0, st);
    check("pop on empty stalls", st);
    for (int i = 0; i < D; i++) begin
      d = {$urandom, $urandom};
      do_op(4'd1, d, st);
      q.push_back(d);
      check("push accepted", !st);
    end
    check("full flag", cond == 2'b10);
    do_op(4'd1, 64'h1, st);
    check("push on full stalls", st);
    for (int i = 0; i < D; i++) begin
      do_op(4'd2, 0, st);
      e = q.pop_front();
      check($sformatf("pop order %0d", i), !st && {out1, out0} == e);
    end
    for (int n = 0; n < 400; n++) begin
      if ($urandom_range(0, 1) != 0) begin
        d = {$urandom, $urandom};
        do_op(4'd1, d, st);
        if (q.size() < D) begin check("push", !st); q.push_back(d); end
        else check("full stall", st);
      end else begin
        do_op(4'd2, 0, st);
        if (q.size() > 0) begin e = q.pop_front(); check("pop data", !st && {out1, out0} == e); end
        else check("empty stall", st);
      end
    end
    do_op(4'd3, 0, st);
    check("clr empties", cond == 2'b01 && !err);
    q.delete();
    // STAGE + PUSHH build a 64-bit word from two 32-bit halves
    for (int n = 0; n < 4; n++) begin
      d = {$urandom, $urandom};
      do_op(4'd4, {32'hDEAD_BEEF, d[31:0]}, st);
      check("stage never stalls", !st);
      do_op(4'd5, {32'hDEAD_BEEF, d[63:32]}, st);
      check("pushh", !st);
      q.push_back(d);
    end
    while (q.size() > 0) begin
      e = q.pop_front();
      do_op(4'd2, 0, st);
      check("pushh data", !st && {out1, out0} == e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
