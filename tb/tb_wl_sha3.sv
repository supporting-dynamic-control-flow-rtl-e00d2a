// tb_wl_sha3 -- SHA3-256 workload on the full top in the SHA slot set-up
// (slot 0, 1: SHA-Buff; slot 2, 3: SHA-Comp; slot 4 empty).
//
// The testbench plays the CPU and the memory. For each message it pads the
// bytes (SHA-3 domain bits 0x06, final 0x80), puts them on the memory read
// stream as little-endian 32-bit words, writes the block count into the loop
// VLIW of the microcode (the only thing the CPU changes between messages) and
// starts one SI. The microcode, with all four parameter sets in use:
//    0       clear SHA-Comp and SHA-Buff; set 0 <- block loop (dest 1)
//    1       set 1 <- lane-fill loop (dest 2)
//    2..3    17 x: SHA-Buff STAGE stream word, PUSHH stream word (one lane)
//    4       set 2 <- absorb loop (dest 5)
//    5..6    17 x: SHA-Buff POP, SHA-Comp ABS {out1, out0} of the buffer
//    7       SHA-Comp PERM; counter jump back to 1 while blocks remain
//    8       set 3 <- squeeze loop (dest 9)
//    9..11   4 x: SQZ (stalls while the permutation runs), write out0 and
//            out1 of SHA-Comp to the memory write stream; last
// A second SI (addresses 32..47) hashes two messages of equal block count at
// once: SHA-Buff 0 feeds SHA-Comp 2 and SHA-Buff 1 feeds SHA-Comp 3, with
// the lanes of the two messages alternating on the stream. It issues
// 22 + 105 * blocks VLIWs and writes the two digests lane by lane, A then B.
// The eight written words are compared with SHA3-256 digests computed
// beforehand with a reference implementation (hard-coded below). The stream
// has random gaps and the write port is held off at random. The number of
// issued VLIWs must be 14 + 71 * blocks, and the test counts counter jumps,
// stream stalls, write stalls and accelerator stalls.
// The padding done by the CPU side and the lane order follow FIPS 202; the
// microcode split follows the paper's SHA-Buff feeding SHA-Comp, and the dual
// SI its two buffer/compute pairs working on separate data in parallel. All
// encodings are this design's own.
module tb_wl_sha3;
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

  rp_top #(.SLOT_KIND(CFG_SHA)) dut (.*);

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
    #20000000;
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

  localparam int RATE = 136;   // SHA3-256 block size in bytes
  localparam int NMSG = 5;
  localparam int LEN [NMSG] = '{0, 135, 300, 700, 350};
  localparam logic [255:0] DIGEST [NMSG] = '{
    256'ha7ffc6f8bf1ed76651c14756a061d662f580ff4de43b49fa82d80a4b80f8434a,
    256'hd9dcf1f98e49a79b0643a9e68fef48079ff8777c5e7e7f93469ded65f192ac71,
    256'h064af3405aacb53d5d77ee858fec1e6e225480de3f14f06444e2b33d92d61879,
    256'h1438881143e2923d76b6c51fc3b06548b5420093f626ec510c88f0294ee46c82,
    256'h32c78ecde9f13fa71fcb6b8facedf7823bf8635f177129a595499beb33406fba};

  // padded message m as bytes
  function automatic void pad(input int m, ref byte unsigned p [$]);
    p.delete();
    for (int i = 0; i < LEN[m]; i++) p.push_back(8'((i * 7 + 3) & 255));
    p.push_back(8'h06);
    while (p.size() % RATE != 0) p.push_back(8'h00);
    p[p.size() - 1] = p[p.size() - 1] | 8'h80;
  endfunction
  function automatic logic [31:0] dword(input int m, input int j);
    logic [31:0] e;
    for (int b = 0; b < 4; b++) e[8*b +: 8] = DIGEST[m][255 - 8*(4*j+b) -: 8];
    return e;
  endfunction

  vliw_t loop_v;

  initial begin
    vliw_t v;
    {n_issue, n_cnt_jmp, n_stream_stall, n_wr_stall, n_acc_stall} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    v = nop(); v.sub[2] = si(1, SRC_ZERO, SRC_ZERO); v.sub[0] = si(3, SRC_ZERO, SRC_ZERO);
    v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = 1; wr(0, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 1; v.ps_dest = 2; wr(1, v);
    v = nop(); v.sub[0] = si(4, SRC_STREAM, SRC_ZERO); wr(2, v);
    v = nop(); v.sub[0] = si(5, SRC_STREAM, SRC_ZERO);
    v.ps_cmd = PS_INC; v.ps_set = 1; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 1; v.jmp_val = 12'(RATE / 8); wr(3, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 2; v.ps_dest = 5; wr(4, v);
    v = nop(); v.sub[0] = si(2, SRC_ZERO, SRC_ZERO); wr(5, v);
    v = nop(); v.sub[2] = si(2, 4'd0, 4'd5);
    v.ps_cmd = PS_INC; v.ps_set = 2; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 2; v.jmp_val = 12'(RATE / 8); wr(6, v);
    loop_v = nop(); loop_v.sub[2] = si(3, SRC_ZERO, SRC_ZERO);
    loop_v.ps_cmd = PS_INC; loop_v.ps_set = 0; loop_v.jmp = JMP_IF_CNT_LT; loop_v.jmp_set = 0;
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 3; v.ps_dest = 9; wr(8, v);
    v = nop(); v.sub[2] = si(4, SRC_ZERO, SRC_ZERO); wr(9, v);
    v = nop(); v.mem_wr = 1; v.res_src = 4'd2; wr(10, v);
    v = nop(); v.mem_wr = 1; v.res_src = 4'd7;
    v.ps_cmd = PS_INC; v.ps_set = 3; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 3; v.jmp_val = 12'd4; v.last = 1; wr(11, v);

    for (int m = 0; m < 4; m++) begin
      byte unsigned p [$];
      int nblk, base_issue, base_jmp;
      pad(m, p);
      nblk = p.size() / RATE;
      for (int w = 0; w < p.size() / 4; w++)
        sq.push_back({p[4*w+3], p[4*w+2], p[4*w+1], p[4*w]});
      // the CPU sets the block count in the loop VLIW
      v = loop_v; v.jmp_val = 12'(nblk); wr(7, v);
      gap_pct = (m == 0) ? 0 : 30;
      base_issue = n_issue; base_jmp = n_cnt_jmp;
      @(negedge clk);
      si_first = 0; si_last = 11; si_start = 1;
      @(negedge clk);
      si_start = 0;
      while (!(si_done || si_trap)) @(negedge clk);
      check($sformatf("msg %0d done", m), si_done && !si_trap);
      check($sformatf("msg %0d issued %0d", m, n_issue - base_issue), n_issue - base_issue == 14 + 71 * nblk);
      check($sformatf("msg %0d counter jumps", m), n_cnt_jmp - base_jmp == 32 * nblk + (nblk - 1) + 3);
      check($sformatf("msg %0d stream drained", m), sq.size() == 0);
      check($sformatf("msg %0d wrote %0d words", m, wq.size()), wq.size() == 8);
      for (int j = 0; j < 8 && wq.size() > 0; j++) begin
        logic [31:0] e, g;
        e = dword(m, j);
        g = wq.pop_front();
        check($sformatf("msg %0d digest word %0d %h exp %h", m, j, g, e), g == e);
      end
      wq.delete();
    end

    // ---- dual SI: SHA-Buff 0 -> SHA-Comp 2 and SHA-Buff 1 -> SHA-Comp 3 ----
    v = nop(); for (int k = 0; k < 2; k++) v.sub[k] = si(3, SRC_ZERO, SRC_ZERO);
    for (int k = 2; k < 4; k++) v.sub[k] = si(1, SRC_ZERO, SRC_ZERO);
    v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = 33; wr(32, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 1; v.ps_dest = 34; wr(33, v);
    v = nop(); v.sub[0] = si(4, SRC_STREAM, SRC_ZERO); wr(34, v);
    v = nop(); v.sub[0] = si(5, SRC_STREAM, SRC_ZERO); wr(35, v);
    v = nop(); v.sub[1] = si(4, SRC_STREAM, SRC_ZERO); wr(36, v);
    v = nop(); v.sub[1] = si(5, SRC_STREAM, SRC_ZERO);
    v.ps_cmd = PS_INC; v.ps_set = 1; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 1; v.jmp_val = 12'(RATE / 8); wr(37, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 2; v.ps_dest = 39; wr(38, v);
    v = nop(); v.sub[0] = si(2, SRC_ZERO, SRC_ZERO); v.sub[1] = si(2, SRC_ZERO, SRC_ZERO); wr(39, v);
    v = nop(); v.sub[2] = si(2, 4'd0, 4'd5); v.sub[3] = si(2, 4'd1, 4'd6);
    v.ps_cmd = PS_INC; v.ps_set = 2; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 2; v.jmp_val = 12'(RATE / 8); wr(40, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 3; v.ps_dest = 43; wr(42, v);
    v = nop(); v.sub[2] = si(4, SRC_ZERO, SRC_ZERO); v.sub[3] = si(4, SRC_ZERO, SRC_ZERO); wr(43, v);
    v = nop(); v.mem_wr = 1; v.res_src = 4'd2; wr(44, v);
    v = nop(); v.mem_wr = 1; v.res_src = 4'd7; wr(45, v);
    v = nop(); v.mem_wr = 1; v.res_src = 4'd3; wr(46, v);
    v = nop(); v.mem_wr = 1; v.res_src = 4'd8;
    v.ps_cmd = PS_INC; v.ps_set = 3; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 3; v.jmp_val = 12'd4; v.last = 1; wr(47, v);
    for (int pr = 0; pr < 2; pr++) begin
      byte unsigned pa [$], pb [$];
      int ma, mb, nblk, base_issue;
      ma = (pr == 0) ? 0 : 2;
      mb = (pr == 0) ? 1 : 4;
      pad(ma, pa); pad(mb, pb);
      nblk = pa.size() / RATE;
      for (int l = 0; l < pa.size() / 8; l++) begin
        for (int h = 0; h < 2; h++) sq.push_back({pa[8*l+4*h+3], pa[8*l+4*h+2], pa[8*l+4*h+1], pa[8*l+4*h]});
        for (int h = 0; h < 2; h++) sq.push_back({pb[8*l+4*h+3], pb[8*l+4*h+2], pb[8*l+4*h+1], pb[8*l+4*h]});
      end
      v = nop(); v.sub[2] = si(3, SRC_ZERO, SRC_ZERO); v.sub[3] = si(3, SRC_ZERO, SRC_ZERO);
      v.ps_cmd = PS_INC; v.ps_set = 0; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 0; v.jmp_val = 12'(nblk); wr(41, v);
      gap_pct = 25;
      base_issue = n_issue;
      @(negedge clk);
      si_first = 32; si_last = 47; si_start = 1;
      @(negedge clk);
      si_start = 0;
      while (!(si_done || si_trap)) @(negedge clk);
      check($sformatf("pair %0d done", pr), si_done && !si_trap);
      check($sformatf("pair %0d issued %0d", pr, n_issue - base_issue), n_issue - base_issue == 22 + 105 * nblk);
      check($sformatf("pair %0d stream drained", pr), sq.size() == 0);
      check($sformatf("pair %0d wrote %0d words", pr, wq.size()), wq.size() == 16);
      for (int j = 0; j < 4 && wq.size() >= 4; j++) begin
        logic [31:0] g [4];
        for (int k = 0; k < 4; k++) g[k] = wq.pop_front();
        check($sformatf("pair %0d lane %0d of A", pr, j), g[0] == dword(ma, 2*j) && g[1] == dword(ma, 2*j+1));
        check($sformatf("pair %0d lane %0d of B", pr, j), g[2] == dword(mb, 2*j) && g[3] == dword(mb, 2*j+1));
      end
      wq.delete();
    end

    check("stream stalls happened", n_stream_stall > 0);
    check("write stalls happened", n_wr_stall > 0);
    check("accelerator stalls happened", n_acc_stall > 0);
    $display("mechanisms: issue=%0d cnt_jmp=%0d stream_stall=%0d wr_stall=%0d acc_stall=%0d",
             n_issue, n_cnt_jmp, n_stream_stall, n_wr_stall, n_acc_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
