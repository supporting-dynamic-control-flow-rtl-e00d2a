// tb_fabric_exec_controller -- self-checking test of the fabric execution
// controller with a testbench-driven fabric. Small microcode programs exercise
// counter loops (LT, NEQ, GT, EQ), always-jump with a same-VLIW parameter
// load, accelerator-conditioned jumps, stalls, and all four trap causes; the
// number of issued VLIWs and of clocks from start to done/trap are compared
// with values worked out by hand from the programs.
module tb_fabric_exec_controller;
  import dce_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic uc_we = 0;
  logic [ADDR_W-1:0] uc_waddr = 0;
  vliw_t uc_wdata;
  logic si_start = 0;
  logic [ADDR_W-1:0] si_first = 0, si_last = 0;
  logic busy, done, trap, issue;
  logic [DATA_W-1:0] result, fab_res;
  trap_e trap_cause;
  logic [UTRAP_W-1:0] trap_value;
  logic [ADDR_W-1:0] trap_pc;
  vliw_t vliw;
  logic fab_stall = 0;
  logic [NSLOTS-1:0] fab_err = 0;
  logic [NSLOTS-1:0][COND_W-1:0] fab_cond = '0;
  int n_issue, n_clk;

  fabric_exec_controller dut (.*);

  assign fab_res = 32'hA5A5_0000 | 32'(vliw.res_src);

  always #5 clk = ~clk;
  always @(posedge clk) if (issue) n_issue <= n_issue + 1;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vliw_t nop();
    vliw_t v;
    v = '0;
    for (int k = 0; k < NSLOTS; k++) v.sub[k] = '{op: '0, src0: SRC_ZERO, src1: SRC_ZERO};
    return v;
  endfunction

  task automatic wr(input int a, input vliw_t v);
    @(negedge clk);
    uc_we = 1; uc_waddr = ADDR_W'(a); uc_wdata = v;
    @(negedge clk);
    uc_we = 0;
  endtask

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // start an SI, optionally stall for `stall_len` clocks from the first VLIW
  // or raise an accelerator error after `err_at` clocks; wait for done or trap
  task automatic run(input int first, input int last, input int stall_len, input int err_at);
    @(negedge clk);
    si_first = ADDR_W'(first); si_last = ADDR_W'(last); si_start = 1;
    n_issue = 0; n_clk = 0;
    @(negedge clk);
    si_start = 0;
    while (!(done || trap)) begin
      fab_stall = (n_clk < stall_len);
      fab_err   = (n_clk == err_at) ? 5'b01000 : 5'b0;
      @(negedge clk);
      n_clk++;
    end
    fab_stall = 0; fab_err = 0;
  endtask

  initial begin
    vliw_t v;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // P1 (0..2): count 0..5 with JMP_IF_CNT_LT
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = 1; v.ps_cnt = 0; wr(0, v);
    v = nop(); v.ps_cmd = PS_INC; v.ps_set = 0; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 0; v.jmp_val = 5; wr(1, v);
    v = nop(); v.res_wr = 1; v.res_src = 4'd3; v.last = 1; wr(2, v);
    // P2 (4..10)
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 1; v.ps_dest = 5; v.ps_cnt = 3; wr(4, v);
    v = nop(); v.ps_cmd = PS_DEC; v.ps_set = 1; v.jmp = JMP_IF_CNT_NEQ; v.jmp_set = 1; v.jmp_val = 0; wr(5, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 2; v.ps_dest = 8; v.jmp = ALW_JMP; v.jmp_set = 2; wr(6, v);
    v = nop(); v.utrap = 7; wr(7, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 3; v.ps_dest = 10; v.ps_cnt = 7; wr(8, v);
    v = nop(); v.jmp = JMP_IF_CNT_GT; v.jmp_set = 3; v.jmp_val = 6; wr(9, v);
    v = nop(); v.jmp = JMP_IF_CNT_EQ; v.jmp_set = 3; v.jmp_val = 8; v.last = 1; v.res_wr = 1; v.res_src = 4'd9; wr(10, v);
    // P3 (12..14): accelerator-conditioned jump on slots 0 and 2
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = 14; v.jmp = JMP_IF_ACC_EQ; v.jmp_set = 0;
    v.acc_sel = 5'b00101; v.jmp_val = 2; wr(12, v);
    v = nop(); v.res_wr = 1; v.res_src = 4'd1; v.last = 1; wr(13, v);
    v = nop(); v.res_wr = 1; v.res_src = 4'd2; v.last = 1; wr(14, v);
    // P4: traps
    v = nop(); v.utrap = 5; wr(16, v);
    v = nop(); v.last = 1; wr(17, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = 30; v.jmp = ALW_JMP; v.jmp_set = 0; wr(18, v);
    v = nop(); v.last = 1; wr(19, v);
    v = nop(); wr(20, v);
    v = nop(); wr(22, v);
    v = nop(); v.last = 1; wr(23, v);
    v = nop(); wr(24, v); wr(25, v);
    v = nop(); v.last = 1; wr(26, v);

    run(0, 2, 0, -1);
    check("P1 done", done && !trap);
    check("P1 issues", n_issue == 7);
    check("P1 clocks", n_clk == 7);
    check("P1 result", result == 32'hA5A5_0003);

    run(4, 10, 0, -1);
    check("P2 done", done && !trap);
    check("P2 issues", n_issue == 8);
    check("P2 result", result == 32'hA5A5_0009);

    fab_cond = {2'd0, 2'd3, 2'd2, 2'd1, 2'd2};
    run(12, 14, 0, -1);
    check("P3 taken", done && result == 32'hA5A5_0002 && n_issue == 2);
    fab_cond = {2'd0, 2'd3, 2'd1, 2'd1, 2'd2};
    run(12, 14, 0, -1);
    check("P3 not taken", done && result == 32'hA5A5_0001 && n_issue == 2);
    fab_cond = '0;

    run(16, 17, 0, -1);
    check("user trap", trap && trap_cause == TRAP_USER && trap_value == 5 && trap_pc == 16 && n_issue == 0);
    run(18, 19, 0, -1);
    check("bad target trap", trap && trap_cause == TRAP_BAD_JUMP && trap_pc == 18);
    run(20, 20, 0, -1);
    check("fall-off trap", trap && trap_cause == TRAP_BAD_JUMP && trap_pc == 20);
    // stall for 600 clocks: trap in the 512th stalled clock
    run(22, 23, 600, -1);
    check("stall trap", trap && trap_cause == TRAP_STALL && trap_pc == 22 && n_issue == 0);
    check("stall trap clock", n_clk == 512);
    // short stall: 10 clocks held, then 2 VLIWs
    run(22, 23, 10, -1);
    check("short stall done", done && !trap && n_issue == 2 && n_clk == 12);
    // accelerator error raised in the second clock
    run(24, 26, 0, 1);
    check("acc error trap", trap && trap_cause == TRAP_ACC_ERR && trap_pc == 25 && n_issue == 1);
    check("idle after trap", !busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
