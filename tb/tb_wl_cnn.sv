// tb_wl_cnn -- CNN layer workload on the full top in the CNN slot set-up
// (slots 0, 1: CNN-MAC; slots 2, 3: CNN-SUM; slot 4 empty).
//
// One SI computes a convolution layer step for an H x W image with 2P input
// channels: out = quant(pool2x2(relu(sum_c conv3x3(ch_c, w_c)))). It follows
// the loop nest of the paper's CNN SI: per channel pair, load the filters,
// read the input lines, compute the outputs line by line until the last row;
// after the last pair, pool, activate, quantize and write the outputs.
//   * CNN-MAC 0 convolves the even channel of a pair; before each of its
//     pixels it loads (LDP) the partial sum of earlier pairs for the same
//     output position, and adds it (PUSHP). CNN-MAC 1 convolves the odd
//     channel and adds MAC 0's result (PUSHA).
//   * Every pass but the last writes the MAC 1 sums to memory as the partial
//     sums of the next pass (the first pass reads zeros).
//   * The last pass feeds the sums to CNN-SUM 2 instead and writes the
//     pooled, quantized bytes; a jump on CNN-SUM's valid signal skips the
//     write while no 2x2 window is complete.
//   * The column loops end on CNN-MAC 1's end-of-line condition (accelerator
//     jumps); rows, filter taps and channel pairs are counter loops. The CPU
//     writes H - 2 and P - 1 into the VLIWs that hold those bounds.
// Microcode: 0 loads set 0 and, if P = 1, jumps straight to the last pass
// (the jump sees the set just loaded); 1 restarts set 0 for the pass loop;
// 2..22 a partial pass, looped P - 1 times; 23..44 the last pass. Each pass:
// configure the MACs (and SUM 2 in the last pass, shift from the stream),
// nine LDW pairs, two warm-up rows, then H - 2 rows of: two columns without a
// full window, and the column loop LDP / PUSHP / PUSHA / write-or-SUM.
// The testbench acts as memory: it streams each pass's words, and streams a
// pass's partial sums only once the previous pass has written them, so the
// SI stalls on the stream until then. Three images (P = 2, 8 x 10, random
// stream gaps and write hold-offs; P = 1, 6 x 6; P = 3, 6 x 8) are compared
// byte by byte with the layer computed in the testbench, and the issued VLIW
// count with the count worked out from the microcode.
// The two-MAC/two-SUM split, line-buffer streaming and loop nest follow the
// paper; the partial sums in memory, widths and encodings are this design's
// own.
module tb_wl_cnn;
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

  rp_top #(.SLOT_KIND(CFG_CNN)) dut (.*);

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

  int n_issue, n_cnt_jmp, n_stream_stall, n_wr_stall, n_acc_stall, n_acc_jmp, n_acc_nojmp, n_skip_a;
  always @(posedge clk) if (rst_n) begin
    if (dut.issue) n_issue++;
    if (dut.issue && dut.u_ctrl.take && dut.vliw.jmp == JMP_IF_CNT_LT) n_cnt_jmp++;
    if (dut.issue && dut.u_ctrl.take && dut.vliw.jmp == JMP_IF_CNT_EQ) n_skip_a++;
    if (si_busy && dut.u_fab.need_stream && !stream_valid) n_stream_stall++;
    if (si_busy && dut.vliw.mem_wr && !wr_ready) n_wr_stall++;
    if (si_busy && (|dut.u_fab.slot_stall)) n_acc_stall++;
    if (dut.issue && dut.vliw.jmp inside {JMP_IF_ACC_EQ, JMP_IF_ACC_NEQ}) begin
      if (dut.u_ctrl.take) n_acc_jmp++; else n_acc_nojmp++;
    end
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



  // one pass of the channel loop at base address b
  task automatic emit_pass(input int b, input bit final_pass, input int rows);
    vliw_t v;
    v = nop(); v.sub[0] = si(1, SRC_OPA, SRC_ZERO); v.sub[1] = si(1, SRC_OPA, SRC_ZERO);
    if (final_pass) v.sub[2] = si(1, SRC_OPB, SRC_STREAM);
    v.ps_cmd = PS_LOAD; v.ps_set = 1; v.ps_dest = ADDR_W'(b + 1); wr(b, v);
    v = nop(); v.sub[0] = si(2, SRC_STREAM, SRC_ZERO); wr(b + 1, v);
    v = nop(); v.sub[1] = si(2, SRC_STREAM, SRC_ZERO);
    v.ps_cmd = PS_INC; v.ps_set = 1; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 1; v.jmp_val = 12'd9; wr(b + 2, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 1; v.ps_dest = ADDR_W'(b + 4); wr(b + 3, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 2; v.ps_dest = ADDR_W'(b + 5); wr(b + 4, v);
    v = nop(); v.sub[0] = si(3, SRC_STREAM, SRC_ZERO); wr(b + 5, v);
    v = nop(); v.sub[1] = si(3, SRC_STREAM, SRC_ZERO); wr(b + 6, v);
    v = nop(); v.jmp = JMP_IF_ACC_NEQ; v.jmp_set = 2; v.acc_sel = 5'b00010; v.jmp_val = 12'd2; wr(b + 7, v);
    v = nop(); v.ps_cmd = PS_INC; v.ps_set = 1; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 1; v.jmp_val = 12'd2; wr(b + 8, v);
    v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 1; v.ps_dest = ADDR_W'(b + 10); wr(b + 9, v);
    v = nop(); v.sub[0] = si(3, SRC_STREAM, SRC_ZERO); wr(b + 10, v);
    v = nop(); v.sub[1] = si(3, SRC_STREAM, SRC_ZERO);
    if (final_pass) begin v.ps_cmd = PS_LOAD; v.ps_set = 3; v.ps_dest = ADDR_W'(b + 20); end
    wr(b + 11, v);
    v = nop(); v.sub[0] = si(3, SRC_STREAM, SRC_ZERO); wr(b + 12, v);
    v = nop(); v.sub[1] = si(3, SRC_STREAM, SRC_ZERO); v.ps_cmd = PS_LOAD; v.ps_set = 2; v.ps_dest = ADDR_W'(b + 14); wr(b + 13, v);
    v = nop(); v.sub[0] = si(5, SRC_STREAM, SRC_ZERO); wr(b + 14, v);      // LDP partial
    v = nop(); v.sub[0] = si(6, SRC_STREAM, SRC_ZERO); wr(b + 15, v);      // PUSHP even channel
    v = nop(); v.sub[1] = si(4, SRC_STREAM, 4'd0); wr(b + 16, v);          // PUSHA odd channel
    if (!final_pass) begin
      v = nop(); v.mem_wr = 1; v.res_src = 4'd1; wr(b + 17, v);            // partial to memory
      v = nop(); v.jmp = JMP_IF_ACC_EQ; v.jmp_set = 2; v.acc_sel = 5'b00010; v.jmp_val = 12'd1; wr(b + 18, v);
      v = nop(); v.ps_cmd = PS_INC; v.ps_set = 1; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 1; v.jmp_val = 12'(rows); wr(b + 19, v);
    end else begin
      v = nop(); v.sub[2] = si(2, 4'd1, SRC_ZERO); wr(b + 17, v);          // SUM 2 push
      v = nop(); v.jmp = JMP_IF_ACC_EQ; v.jmp_set = 3; v.acc_sel = 5'b00100; v.jmp_val = 12'd0; wr(b + 18, v);
      v = nop(); v.mem_wr = 1; v.res_src = 4'd2; wr(b + 19, v);            // output byte
      v = nop(); v.jmp = JMP_IF_ACC_EQ; v.jmp_set = 2; v.acc_sel = 5'b00010; v.jmp_val = 12'd1; wr(b + 20, v);
      v = nop(); v.ps_cmd = PS_INC; v.ps_set = 1; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 1; v.jmp_val = 12'(rows);
      v.last = 1; wr(b + 21, v);
    end
  endtask

  localparam int A0 = 2, B0 = 23;

  initial begin
    vliw_t v;
    localparam int NRUN = 3;
    int hh [NRUN] = '{8, 6, 6};
    int ww [NRUN] = '{10, 6, 8};
    int pp [NRUN] = '{2, 1, 3};
    int shf [NRUN] = '{6, 3, 7};
    {n_issue, n_cnt_jmp, n_stream_stall, n_wr_stall, n_acc_stall, n_acc_jmp, n_acc_nojmp, n_skip_a} = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int r = 0; r < NRUN; r++) begin
      int H, W, P, base_issue, nout, npart, expect_issue;
      byte wt [][9];
      byte pix [][][];
      int conv [][];
      logic [7:0] expq [$];
      H = hh[r]; W = ww[r]; P = pp[r];
      expq.delete();
      npart = (H - 2) * (W - 2);
      // microcode: the CPU writes the row and pair counts
      v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = B0;
      v.jmp = JMP_IF_CNT_EQ; v.jmp_set = 0; v.jmp_val = 12'(P - 1); wr(0, v);
      v = nop(); v.ps_cmd = PS_LOAD; v.ps_set = 0; v.ps_dest = A0; wr(1, v);
      emit_pass(A0, 1'b0, H - 2);
      v = nop(); v.ps_cmd = PS_INC; v.ps_set = 0; v.jmp = JMP_IF_CNT_LT; v.jmp_set = 0;
      v.jmp_val = 12'(P - 1); wr(A0 + 20, v);
      emit_pass(B0, 1'b1, H - 2);
      // data
      wt = new[2 * P];
      pix = new[2 * P];
      for (int c = 0; c < 2 * P; c++) begin
        for (int k = 0; k < 9; k++) wt[c][k] = 8'($urandom_range(0, 15)) - 8'sd8;
        pix[c] = new[H];
        for (int y = 0; y < H; y++) begin
          pix[c][y] = new[W];
          for (int x = 0; x < W; x++) pix[c][y][x] = 8'($urandom);
        end
      end
      conv = new[H - 2];
      for (int y = 0; y < H - 2; y++) begin
        conv[y] = new[W - 2];
        for (int x = 0; x < W - 2; x++) begin
          int s;
          s = 0;
          for (int c = 0; c < 2 * P; c++)
            for (int i = 0; i < 3; i++)
              for (int j = 0; j < 3; j++)
                s += int'(pix[c][y+i][x+j]) * int'(wt[c][3*i+j]);
          conv[y][x] = (s < 0) ? 0 : s;
        end
      end
      for (int y = 0; y + 1 < H - 2; y += 2)
        for (int x = 0; x + 1 < W - 2; x += 2) begin
          int m;
          m = conv[y][x];
          if (conv[y][x+1] > m) m = conv[y][x+1];
          if (conv[y+1][x] > m) m = conv[y+1][x];
          if (conv[y+1][x+1] > m) m = conv[y+1][x+1];
          m = m >> shf[r];
          expq.push_back((m > 255) ? 8'd255 : 8'(m));
        end
      nout = expq.size();
      expect_issue = 1 + ((P > 1) ? 1 : 0)
                   + (P - 1) * (21 + 2 * (3 * W + 2) + (H - 2) * (5 * (W - 2) + 5) + 1)
                   + 21 + 2 * (3 * W + 2) + (H - 2) * (6 * (W - 2) + 5) + nout;
      si_opa = 32'(W); si_opb = 32'(W - 2);
      gap_pct = (r == 0) ? 30 : 0;
      wq.delete();
      base_issue = n_issue;
      // memory side: pass k's words, its partial sums once pass k-1 wrote them
      fork
        for (int k = 0; k < P; k++) begin
          if (k > 0) wait (wq.size() >= k * npart);
          if (k == P - 1) sq.push_back(32'(shf[r]));
          for (int t = 0; t < 9; t++) begin
            sq.push_back(32'(wt[2*k][t])); sq.push_back(32'(wt[2*k+1][t]));
          end
          for (int y = 0; y < H; y++)
            for (int x = 0; x < W; x++) begin
              if (y >= 2 && x >= 2)
                sq.push_back((k == 0) ? 32'd0 : wq[(k - 1) * npart + (y - 2) * (W - 2) + (x - 2)]);
              sq.push_back(32'(pix[2*k][y][x]));
              sq.push_back(32'(pix[2*k+1][y][x]));
            end
        end
      join_none
      @(negedge clk);
      si_first = 0; si_last = ADDR_W'(B0 + 21); si_start = 1;
      @(negedge clk);
      si_start = 0;
      while (!(si_done || si_trap)) @(negedge clk);
      check($sformatf("run %0d done", r), si_done && !si_trap);
      check($sformatf("run %0d issued %0d exp %0d", r, n_issue - base_issue, expect_issue),
            n_issue - base_issue == expect_issue);
      check($sformatf("run %0d stream drained", r), sq.size() == 0);
      check($sformatf("run %0d wrote %0d", r, wq.size()), wq.size() == (P - 1) * npart + nout);
      for (int i = 0; i < nout && (P - 1) * npart + i < wq.size(); i++) begin
        logic [31:0] g;
        g = wq[(P - 1) * npart + i];
        check($sformatf("run %0d out %0d = %0d exp %0d", r, i, g, expq[i]), g == 32'(expq[i]));
      end
    end

    check("counter jumps happened", n_cnt_jmp > 0);
    check("single-pair jump over the partial passes", n_skip_a == 1);
    check("accelerator jumps taken", n_acc_jmp > 0);
    check("accelerator jumps not taken", n_acc_nojmp > 0);
    check("stream stalls happened", n_stream_stall > 0);
    check("write stalls happened", n_wr_stall > 0);
    $display("mechanisms: issue=%0d cnt_jmp=%0d acc_jmp=%0d acc_nojmp=%0d stream_stall=%0d wr_stall=%0d",
             n_issue, n_cnt_jmp, n_acc_jmp, n_acc_nojmp, n_stream_stall, n_wr_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
