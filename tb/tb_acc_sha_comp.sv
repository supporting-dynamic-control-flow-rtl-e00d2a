// tb_acc_sha_comp -- self-checking test of SHA-Comp against published values:
// Keccak-f[1600] of the zero state (first lane F1258F7940E1DDE7) and the
// SHA3-256 digests of "" and "abc" (FIPS 202 examples), absorbing padded
// one-block messages lane by lane. Also checks the 24-clock permutation time
// and that ABS stalls while the permutation runs.
module tb_acc_sha_comp;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;

  acc_sha_comp dut (.*);
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

  // issue one op, waiting through stalls; returns the stalled clocks
  task automatic do_op(input logic [3:0] o, input logic [63:0] d, output int stalls);
    @(negedge clk);
    en = 1; op = o; in0 = d[31:0]; in1 = d[63:32];
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

  task automatic sha3_256_block(input logic [63:0] lane0, output logic [255:0] dig, output int pst);
    int st;
    do_op(4'd1, 0, st);
    for (int i = 0; i < 17; i++)
      do_op(4'd2, (i == 0) ? lane0 : (i == 16) ? 64'h8000_0000_0000_0000 : 64'd0, st);
    do_op(4'd3, 0, st);
    do_op(4'd4, 0, pst);     // first squeeze waits for the permutation
    dig[255:192] = {out1, out0};
    for (int i = 1; i < 4; i++) begin
      do_op(4'd4, 0, st);
      dig[255-64*i -: 64] = {out1, out0};
    end
  endtask

  function automatic logic [63:0] bswap(logic [63:0] v);
    logic [63:0] r;
    for (int i = 0; i < 8; i++) r[8*i +: 8] = v[56-8*i +: 8];
    return r;
  endfunction

  initial begin
    int st;
    logic [255:0] dig, be;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Keccak-f on the zero state
    do_op(4'd1, 0, st);
    do_op(4'd3, 0, st);
    check("busy while permuting", cond[0] == 1'b1);
    do_op(4'd4, 0, st);
    check($sformatf("perm stall %0d", st), st == 23);
    check($sformatf("keccak-f(0) lane0 %h", {out1, out0}), {out1, out0} == 64'hF1258F7940E1DDE7);
    // SHA3-256("")
    sha3_256_block(64'h06, dig, st);
    for (int i = 0; i < 4; i++) be[255-64*i -: 64] = bswap(dig[255-64*i -: 64]);
    check($sformatf("sha3-256('') %h", be),
          be == 256'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a);
    // SHA3-256("abc")
    sha3_256_block(64'h0000_0000_0663_6261, dig, st);
    for (int i = 0; i < 4; i++) be[255-64*i -: 64] = bswap(dig[255-64*i -: 64]);
    check($sformatf("sha3-256('abc') %h", be),
          be == 256'h3a985da74fe225b2045c172d6bd390bd855f086e3e9d525b46bfe24511431532);
    check("no error", !err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
