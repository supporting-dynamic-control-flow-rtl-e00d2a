// tb_wl_sift -- SIFT-match workload on the full top in the SIFT slot set-up
// (slots 0..3: FMAV; slot 4 empty).
//
// The SI computes the squared euclidean distance sum_i (a_i - b_i)^2 between a
// reference feature vector a and a detected one b, with the feature count n
// chosen at run time. The memory read stream carries a_0, b_0, a_1, b_1, ...;
// each of the four FMAV slots takes every fourth feature pair, subtracts,
// squares and accumulates in its save register, and the four partial sums are
// added at the end. The CPU pads the vector to a multiple of four with zero
// pairs and writes ceil(n/4) into the loop VLIW; the loop body is eight VLIWs
// (one stream word each), software-pipelined so slot 3's square and
// accumulate spill into the next iteration and into a two-VLIW epilogue:
//    0       clear the four sums; set 0 <- loop (dest 2)
//    1       slot 3 out <- 0 (so the first spilled square adds nothing)
//    2..9    loop: slot k PASS a, SUB b, SQR, ACC, staggered by two VLIWs
//    10..11  slot 3 SQR, ACC of the last iteration
//    12..15  read the sums, add them as a tree, result; last
// Feature counts 128 (a full SIFT descriptor), 64, 12 and 5 are run, with and
// without random gaps in the stream. Each result is compared with the sum
// computed in real arithmetic; the issued VLIW count must be 8 + 8 * ceil(n/4).
// The subtract-square-accumulate split over FMAV accelerators and the run-time
// feature count follow the paper; the schedule and encodings are this design's
// own.
module tb_wl_sift;
  import tb_fp_pkg::*;
  import dce_pkg::*;

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

  rp_top #(.SLOT_KIND(CFG_SIFT)) dut (.*);

  always #5 clk = ~clk;

  // memory model: read stream from a queue with random gaps, writes collected
  logic [31:0] sq [$];
  logic [31:0] wq [$];
  int gap_pct = 0;
  logic gap = 0;
  always_comb begin
    stream_valid = (sq.size() > 0) && !gap;
    stream_data  = (sq.size() > 0) ? sq[0] : 32'd0;
  end
  always @(posedge clk) begin
    if (stream_pop) void'(sq.pop_front());
    if (wr_valid) wq.push_back(wr_data);
    gap      <= ($urandom_range(0, 99) < gap_pct);
    wr_ready <= ($urandom_range(0, 99) >= gap_pct);
  end

  int n_issue, n_cnt_jmp, n_stream_stall, n_wr_stall, n_acc_stall;
  always @(posedge clk) if (rst_n) begin
    if (dut.issue) n_issue++;
    if (dut.issue && dut.u_ctrl.take && dut.vliw.jmp == JMP_IF_CNT_LT) n_cnt_jmp++;
    if (si_busy && dut.u_fab.need_stream && !stream_valid) n_stream_stall++;
    if (si_busy && dut.vliw.mem_wr && !wr_ready) n_wr_stall++;
    if (si_busy && (|dut.u_fab.slot_stall)) n_acc_stall++;
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


  vliw_t loop_v;

  initial begin
    vliw_t v;
    localparam int NRUN = 6;
    int nf [NRUN] = '{128, 64, 12, 5, 128, 4};
    {n_issue, n_cnt_jmp, n_stream_stall, n_wr_stall, n_acc_stall} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    v = nop(); for (int k = 0; k < 4; k++) v.sub[k] = si(6, SRC_ZERO, SRC_ZERO);
    v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = 2; wr(0, v);
    v = nop(); v.sub[3] = si(8, SRC_ZERO, SRC_ZERO); wr(1, v);
    // loop body: slot k works in VLIWs 2+2k .. 5+2k (mod 8 for slot 3)
    for (int j = 0; j < 8; j++) begin
      v = nop();
      for (int k = 0; k < 4; k++) begin
        int ph;
        ph = (j - 2*k + 8) % 8;
        case (ph)
          0: v.sub[k] = si(8, SRC_STREAM, SRC_ZERO);      // PASS a
          1: v.sub[k] = si(2, 4'(k), SRC_STREAM);          // SUB a - b
          2: v.sub[k] = si(4, SRC_ZERO, SRC_ZERO);         // SQR
          3: v.sub[k] = si(5, SRC_ZERO, SRC_ZERO);         // ACC
          default: ;
        endcase
      end
      if (j == 7) loop_v = v; else wr(2 + j, v);
    end
    loop_v.ps_cmd = PS_INC; loop_v.ps_set = 0; loop_v.jmp = JMP_IF_CNT_LT; loop_v.jmp_set = 0;
    v = nop(); v.sub[3] = si(4, SRC_ZERO, SRC_ZERO); wr(10, v);
    v = nop(); v.sub[3] = si(5, SRC_ZERO, SRC_ZERO); wr(11, v);
    v = nop(); for (int k = 0; k < 4; k++) v.sub[k] = si(7, SRC_ZERO, SRC_ZERO); wr(12, v);
    v = nop(); v.sub[0] = si(1, 4'd0, 4'd1); v.sub[2] = si(1, 4'd2, 4'd3); wr(13, v);
    v = nop(); v.sub[0] = si(1, 4'd0, 4'd2); wr(14, v);
    v = nop(); v.res_wr = 1; v.res_src = 4'd0; v.last = 1; wr(15, v);

    for (int r = 0; r < NRUN; r++) begin
      int iters, base_issue, base_jmp;
      real acc, got;
      acc = 0.0;
      iters = (nf[r] + 3) / 4;
      for (int i = 0; i < 4 * iters; i++) begin
        real a, b;
        if (i < nf[r]) begin a = b2f(rnd_f()); b = b2f(rnd_f()); end
        else begin a = 0.0; b = 0.0; end
        sq.push_back(f2b(a)); sq.push_back(f2b(b));
        acc += (a - b) * (a - b);
      end
      // the CPU sets the iteration count in the loop VLIW
      v = loop_v; v.jmp_val = 12'(iters); wr(9, v);
      gap_pct = (r % 2 == 0) ? 0 : 35;
      base_issue = n_issue; base_jmp = n_cnt_jmp;
      @(negedge clk);
      si_first = 0; si_last = 15; si_start = 1;
      @(negedge clk);
      si_start = 0;
      while (!(si_done || si_trap)) @(negedge clk);
      got = b2f(si_result);
      check($sformatf("run %0d done", r), si_done && !si_trap);
      check($sformatf("run %0d n=%0d sum %f exp %f", r, nf[r], got, acc),
            got - acc <= 1e-4 * acc && acc - got <= 1e-4 * acc);
      check($sformatf("run %0d issued %0d", r, n_issue - base_issue), n_issue - base_issue == 8 + 8 * iters);
      check($sformatf("run %0d counter jumps", r), n_cnt_jmp - base_jmp == iters - 1);
      check($sformatf("run %0d stream drained", r), sq.size() == 0);
    end

    check("stream stalls happened", n_stream_stall > 0);
    check("counter loop ran", n_cnt_jmp > 0);
    $display("mechanisms: issue=%0d cnt_jmp=%0d stream_stall=%0d", n_issue, n_cnt_jmp, n_stream_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
