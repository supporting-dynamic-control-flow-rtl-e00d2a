// tb_reconf_fabric -- self-checking test of the fabric crossbar in the SWE
// set-up (FMAV, FMAV, DIV, SQRT, UTIL): CPU operands into a slot, slot-to-slot
// forwarding, the result source, condition signals, the memory-stream stall
// and pop, the memory-write stall and strobe, an accelerator stall (DIV read while busy) and error reporting.
module tb_reconf_fabric;
  import dce_pkg::*;
  import tb_fp_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, issue = 0;
  vliw_t vliw;
  logic [31:0] opa, opb, stream_data, res;
  logic stream_valid = 0, stream_pop, stall;
  logic [31:0] wr_data;
  logic wr_valid, wr_ready = 0;
  logic [NSLOTS-1:0] err;
  logic [NSLOTS-1:0][COND_W-1:0] cond;

  reconf_fabric dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vliw_t nop();
    vliw_t v;
    v = '0;
    for (int k = 0; k < NSLOTS; k++) v.sub[k] = '{op: '0, src0: SRC_ZERO, src1: SRC_ZERO};
    v.res_src = SRC_ZERO;
    return v;
  endfunction
  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic step(input vliw_t v);
    @(negedge clk);
    vliw = v; issue = 1;
    @(negedge clk);
    issue = 0; vliw = nop();
  endtask

  initial begin
    vliw_t v;
    vliw = nop();
    opa = f2b(3.0); opb = f2b(4.0); stream_data = f2b(10.0);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // slot0 <- opa + opb ; slot1 <- opa * opb
    v = nop();
    v.sub[0] = '{op: 4'd1, src0: SRC_OPA, src1: SRC_OPB};
    v.sub[1] = '{op: 4'd3, src0: SRC_OPA, src1: SRC_OPB};
    step(v);
    v = nop(); v.res_src = 4'd0; vliw = v; #1;
    check("res = slot0 out0 = 7", res == f2b(7.0));
    v.res_src = 4'd6; vliw = v; #1;     // output1 of slot 1
    check("res = slot1 out1 = 12", res == f2b(12.0));
    // slot4 compares slot0 (7) with slot1 (12); slot2 divides slot1 by slot0
    v = nop();
    v.sub[4] = '{op: 4'd1, src0: 4'd0, src1: 4'd1};
    v.sub[2] = '{op: 4'd1, src0: 4'd1, src1: 4'd0};
    step(v);
    check("cond of slot 4 = less", cond[4] == 2'd1);
    // read the quotient at once: the divider stalls the fabric
    v = nop(); v.sub[2] = '{op: 4'd2, src0: SRC_ZERO, src1: SRC_ZERO};
    @(negedge clk);
    vliw = v; issue = 0; #1;
    check("div read stalls", stall);
    repeat (30) @(negedge clk);
    #1 check("stall released", !stall);
    issue = 1;
    @(negedge clk);
    issue = 0; vliw = nop();
    v = nop(); v.res_src = 4'd2; vliw = v; #1;
    check("12/7", near(res, f2b(12.0 / 7.0)));
    // stream source without data stalls and does not pop
    v = nop(); v.sub[0] = '{op: 4'd8, src0: SRC_STREAM, src1: SRC_ZERO};
    @(negedge clk);
    vliw = v; issue = 0; stream_valid = 0; #1;
    check("stream stall", stall && !stream_pop);
    stream_valid = 1; #1;
    check("stream ready", !stall);
    issue = 1; #1;
    check("stream pop on issue", stream_pop);
    @(negedge clk);
    issue = 0; stream_valid = 0; vliw = nop(); #1;
    check("stream word in slot 0", dut.o0[0] == f2b(10.0));
    // memory write: stalls while wr_ready is low, sends res on issue
    v = nop(); v.mem_wr = 1; v.res_src = 4'd0;
    @(negedge clk);
    vliw = v; issue = 0; wr_ready = 0; #1;
    check("write stall", stall && !wr_valid);
    wr_ready = 1; #1;
    check("write ready", !stall);
    issue = 1; #1;
    check("write on issue", wr_valid && wr_data == f2b(10.0));
    @(negedge clk);
    issue = 0; vliw = nop(); #1;
    check("no write without mem_wr", !wr_valid);
    // sqrt of a negative value: error from slot 3 after its read
    v = nop(); v.sub[3] = '{op: 4'd1, src0: SRC_ZERO, src1: SRC_ZERO};
    opa = f2b(-1.0);
    v.sub[3].src0 = SRC_OPA;
    step(v);
    v = nop(); v.sub[3] = '{op: 4'd2, src0: SRC_ZERO, src1: SRC_ZERO};
    step(v);
    #1 check("sqrt(-1) error on slot 3", err == 5'b01000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
