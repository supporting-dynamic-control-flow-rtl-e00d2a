// tb_rp_top -- end-to-end test of the fabric with dynamic control flow, with
// every parameter at its default (SWE slot set-up: FMAV, FMAV, DIV, SQRT, UTIL;
// 1024-VLIW microcode memory; 512-clock stall limit).
//
// The testbench plays the CPU and the memory: it writes microcode through the
// load port, starts SIs and feeds a memory stream with random gaps. The main SI
// computes min( sqrt( sum_k (a_k - b_k)^2 ) / A, B ) over K pairs (a_k, b_k)
// taken from the stream, writing each a_k - b_k to the memory write stream
// (which is held off at random): a counter loop (JMP_IF_CNT_LT), two accelerator
// stalls (SQRT and DIV reads), stream stalls, and an accelerator-conditioned
// jump on the UTIL comparison that picks the final value. Further SIs raise
// each trap cause. The result is compared with real arithmetic, the clock
// count of a gap-free run with the count worked out from the program, and
// each mechanism must have occurred at least once.
module tb_rp_top;
  import dce_pkg::*;
  import tb_fp_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic uc_we = 0;
  logic [ADDR_W-1:0] uc_waddr = 0;
  vliw_t uc_wdata;
  logic si_start = 0;
  logic [ADDR_W-1:0] si_first = 0, si_last = 0;
  logic [DATA_W-1:0] si_opa = 0, si_opb = 0, si_result;
  logic si_busy, si_done, si_trap;
  trap_e si_trap_cause;
  logic [UTRAP_W-1:0] si_trap_value;
  logic [ADDR_W-1:0] si_trap_pc;
  logic [DATA_W-1:0] stream_data;
  logic stream_valid, stream_pop, fab_stall;
  logic [DATA_W-1:0] wr_data;
  logic wr_valid, wr_ready = 1;
  logic [31:0] wq [$];
  always @(posedge clk) if (wr_valid) wq.push_back(wr_data);
  always @(posedge clk) wr_ready <= ($urandom_range(0, 99) >= gap_pct);

  rp_top dut (.*);

  always #5 clk = ~clk;

  // memory stream model: words from a queue, valid with probability gap_pct
  logic [31:0] sq [$];
  int gap_pct = 0;
  logic gap;
  always_comb begin
    stream_valid = (sq.size() > 0) && !gap;
    stream_data  = (sq.size() > 0) ? sq[0] : 32'd0;
  end
  always @(posedge clk) begin
    if (stream_pop) void'(sq.pop_front());
    gap <= ($urandom_range(0, 99) < gap_pct);
  end

  // mechanism counters
  int n_cnt_jmp, n_acc_jmp, n_acc_nojmp, n_stream_stall, n_acc_stall, n_issue, n_wr, n_wr_stall;
  int n_trap [8];
  always @(posedge clk) if (rst_n) begin
    if (dut.issue) n_issue++;
    if (dut.issue && dut.u_ctrl.take && dut.vliw.jmp inside {JMP_IF_CNT_EQ, JMP_IF_CNT_NEQ, JMP_IF_CNT_LT, JMP_IF_CNT_GT}) n_cnt_jmp++;
    if (dut.issue && dut.vliw.jmp inside {JMP_IF_ACC_EQ, JMP_IF_ACC_NEQ, JMP_IF_ACC_LT, JMP_IF_ACC_GT}) begin
      if (dut.u_ctrl.take) n_acc_jmp++; else n_acc_nojmp++;
    end
    if (si_busy && dut.u_fab.need_stream && !stream_valid) n_stream_stall++;
    if (si_busy && dut.vliw.mem_wr && !wr_ready) n_wr_stall++;
    if (wr_valid) n_wr++;
    if (si_busy && (|dut.u_fab.slot_stall)) n_acc_stall++;
    if (si_trap) n_trap[si_trap_cause]++;
  end

  initial begin
    #5000000;
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
  function automatic sub_instr_t si(int op, logic [SRC_W-1:0] s0, logic [SRC_W-1:0] s1);
    return '{op: 4'(op), src0: s0, src1: s1};
  endfunction
  task automatic wr(input int a, input vliw_t v);
    @(negedge clk);
    uc_we = 1; uc_waddr = ADDR_W'(a); uc_wdata = v;
    @(negedge clk);
    uc_we = 0;
  endtask
  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic run(input int first, input int last, output int clocks);
    @(negedge clk);
    si_first = ADDR_W'(first); si_last = ADDR_W'(last); si_start = 1;
    @(negedge clk);
    si_start = 0;
    clocks = 0;
    while (!(si_done || si_trap)) begin
      @(negedge clk);
      clocks++;
    end
  endtask

  localparam int K = 8;   // pairs per SI (loop bound in the microcode)

  initial begin
    vliw_t v;
    int clocks, base_issue;
    real a [K], b [K], acc, expv;
    for (int i = 0; i < 8; i++) n_trap[i] = 0;
    {n_cnt_jmp, n_acc_jmp, n_acc_nojmp, n_stream_stall, n_acc_stall, n_issue, n_wr, n_wr_stall} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- main SI, addresses 0..14 ----
    v = nop(); v.sub[0] = si(6, SRC_ZERO, SRC_ZERO);                    // CLR sum
    v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = 1; v.ps_cnt = 0; wr(0, v);
    v = nop(); v.sub[1] = si(8, SRC_STREAM, SRC_ZERO); wr(1, v);        // slot1 <- a_k
    v = nop(); v.sub[0] = si(2, 4'd1, SRC_STREAM); wr(2, v);            // slot0 <- a_k - b_k
    v = nop(); v.sub[0] = si(4, SRC_ZERO, SRC_ZERO); v.mem_wr = 1; v.res_src = 4'd0; wr(3, v); // square; a_k - b_k to memory
    v = nop(); v.sub[0] = si(5, SRC_ZERO, SRC_ZERO);                    // accumulate
    v.ps_cmd = PS_INC; v.ps_set = 0; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 0; v.jmp_val = 12'(K); wr(4, v);
    v = nop(); v.sub[0] = si(7, SRC_ZERO, SRC_ZERO);                    // read sum
    v.ps_cmd = PS_LOAD; v.ps_set = 1; v.ps_dest = 13; wr(5, v);
    v = nop(); v.sub[3] = si(1, 4'd0, SRC_ZERO); wr(6, v);              // sqrt(sum)
    v = nop(); v.sub[3] = si(2, SRC_ZERO, SRC_ZERO); wr(7, v);          // read root (stalls)
    v = nop(); v.sub[2] = si(1, 4'd3, SRC_OPA); wr(8, v);               // root / A
    v = nop(); v.sub[2] = si(2, SRC_ZERO, SRC_ZERO); wr(9, v);          // read quotient (stalls)
    v = nop(); v.sub[4] = si(1, 4'd2, SRC_OPB); wr(10, v);              // compare with B
    v = nop(); v.jmp = JMP_IF_ACC_EQ; v.jmp_set = 1; v.acc_sel = 5'b10000; v.jmp_val = 2; wr(11, v);
    v = nop(); v.res_wr = 1; v.res_src = 4'd2; v.last = 1; wr(12, v);  // result = quotient
    v = nop(); v.sub[0] = si(8, SRC_OPB, SRC_ZERO); wr(13, v);          // quotient > B: take B
    v = nop(); v.res_wr = 1; v.res_src = 4'd0; v.last = 1; wr(14, v);
    // ---- trap SIs ----
    v = nop(); v.utrap = 3; wr(20, v);
    v = nop(); v.last = 1; wr(21, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 2; v.ps_dest = 100; v.jmp = ALW_JMP; v.jmp_set = 2; wr(22, v);
    v = nop(); v.last = 1; wr(23, v);
    v = nop(); v.sub[3] = si(1, SRC_OPA, SRC_ZERO); wr(24, v);
    v = nop(); v.sub[3] = si(2, SRC_ZERO, SRC_ZERO); wr(25, v);
    v = nop(); v.last = 1; wr(26, v);
    v = nop(); v.sub[1] = si(8, SRC_STREAM, SRC_ZERO); wr(28, v);
    v = nop(); v.last = 1; wr(29, v);

    for (int trial = 0; trial < 6; trial++) begin
      real A, B;
      acc = 0.0;
      for (int k = 0; k < K; k++) begin
        a[k] = b2f(rnd_f()); b[k] = b2f(rnd_f());
        sq.push_back(f2b(a[k])); sq.push_back(f2b(b[k]));
        acc += (a[k] - b[k]) * (a[k] - b[k]);
      end
      A = b2f(rnd_f()); if (A < 0) A = -A;
      expv = $sqrt(acc) / A;
      B = (trial % 2 == 0) ? expv * 2.0 : expv * 0.5;
      si_opa = f2b(A); si_opb = f2b(B);
      gap_pct = (trial < 2) ? 0 : 40;
      base_issue = n_issue;
      run(0, 14, clocks);
      if (trial % 2 == 1) expv = b2f(f2b(B));
      check($sformatf("trial %0d done", trial), si_done && !si_trap);
      check($sformatf("trial %0d result %f exp %f", trial, b2f(si_result), expv),
            (b2f(si_result) - expv) / expv < 1e-5 && (expv - b2f(si_result)) / expv < 1e-5);
      if (trial == 0) begin
        check($sformatf("issued %0d VLIWs", n_issue - base_issue), n_issue - base_issue == 4*K + 9);
        check($sformatf("gap-free run %0d clocks", clocks), clocks == 4*K + 9 + 50);
      end
      check("stream drained", sq.size() == 0);
      check($sformatf("trial %0d wrote %0d words", trial, wq.size()), wq.size() == K);
      for (int k = 0; k < K && wq.size() > 0; k++) begin
        real d, tol;
        d = b2f(wq.pop_front());
        tol = 1e-6 * ((a[k] < 0 ? -a[k] : a[k]) + (b[k] < 0 ? -b[k] : b[k]));
        check($sformatf("trial %0d write %0d", trial, k), d - (a[k] - b[k]) <= tol && (a[k] - b[k]) - d <= tol);
      end
      wq.delete();
    end

    si_opa = f2b(-4.0);
    run(20, 21, clocks);
    check("user trap", si_trap && si_trap_cause == TRAP_USER && si_trap_value == 3 && si_trap_pc == 20);
    run(22, 23, clocks);
    check("bad jump trap", si_trap && si_trap_cause == TRAP_BAD_JUMP && si_trap_pc == 22);
    run(24, 26, clocks);
    check("accelerator error trap", si_trap && si_trap_cause == TRAP_ACC_ERR && si_trap_pc == 26);
    run(28, 29, clocks);
    check("stall limit trap", si_trap && si_trap_cause == TRAP_STALL && si_trap_pc == 28 && clocks == STALL_LIMIT);

    repeat (2) @(negedge clk);
    check("counter jumps happened", n_cnt_jmp == 6 * (K - 1));
    check("accelerator jump taken", n_acc_jmp == 3);
    check("accelerator jump not taken", n_acc_nojmp == 3);
    check("stream stalls happened", n_stream_stall > 0);
    check("memory writes happened", n_wr == 6 * K);
    check("memory write stalls happened", n_wr_stall > 0);
    check("accelerator stalls happened", n_acc_stall >= 6 * 50);
    check("each trap cause once", n_trap[TRAP_USER] == 1 && n_trap[TRAP_BAD_JUMP] == 1 &&
          n_trap[TRAP_ACC_ERR] == 1 && n_trap[TRAP_STALL] == 1);
    $display("mechanisms: cnt_jmp=%0d acc_jmp=%0d acc_nojmp=%0d stream_stall=%0d acc_stall=%0d wr=%0d wr_stall=%0d traps=%0d/%0d/%0d/%0d",
             n_cnt_jmp, n_acc_jmp, n_acc_nojmp, n_stream_stall, n_acc_stall, n_wr, n_wr_stall,
             n_trap[TRAP_BAD_JUMP], n_trap[TRAP_ACC_ERR], n_trap[TRAP_STALL], n_trap[TRAP_USER]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
