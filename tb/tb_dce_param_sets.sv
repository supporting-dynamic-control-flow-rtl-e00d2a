// tb_dce_param_sets -- self-checking test of the four jump parameter sets:
// random load/increment/decrement commands against a reference model, checking
// the same-cycle preview and the stored values.
module tb_dce_param_sets;
  import dce_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, apply;
  ps_cmd_e cmd;
  logic [SET_W-1:0]  set, rd_set;
  logic [ADDR_W-1:0] dest_in, rd_dest;
  logic [CNT_W-1:0]  cnt_in, rd_cnt;
  logic [ADDR_W-1:0] m_dest [4];
  logic [CNT_W-1:0]  m_cnt  [4];
  logic [ADDR_W-1:0] e_dest [4];
  logic [CNT_W-1:0]  e_cnt  [4];

  dce_param_sets dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply = 0; cmd = PS_NONE; set = 0; rd_set = 0; dest_in = 0; cnt_in = 0;
    for (int i = 0; i < 4; i++) begin m_dest[i] = 0; m_cnt[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      apply   = ($urandom_range(0, 3) != 0);
      cmd     = ps_cmd_e'($urandom_range(0, 3));
      set     = SET_W'($urandom);
      rd_set  = (n % 2) ? set : SET_W'($urandom);
      dest_in = ADDR_W'($urandom);
      cnt_in  = (n % 50 == 0) ? 12'hFFF : CNT_W'($urandom);
      for (int i = 0; i < 4; i++) begin e_dest[i] = m_dest[i]; e_cnt[i] = m_cnt[i]; end
      case (cmd)
        PS_LOAD: begin e_dest[set] = dest_in; e_cnt[set] = cnt_in; end
        PS_INC:  e_cnt[set] = m_cnt[set] + 1;
        PS_DEC:  e_cnt[set] = m_cnt[set] - 1;
        default: ;
      endcase
      #1;
      checks++;
      if (rd_cnt !== e_cnt[rd_set] || rd_dest !== e_dest[rd_set]) begin
        failures++;
        if (failures < 10) $display("FAIL preview set %0d: cnt %0d exp %0d", rd_set, rd_cnt, e_cnt[rd_set]);
      end
      if (apply) for (int i = 0; i < 4; i++) begin m_dest[i] = e_dest[i]; m_cnt[i] = e_cnt[i]; end
    end
    // read back the stored values with idle commands
    @(negedge clk);
    apply = 0; cmd = PS_NONE;
    for (int i = 0; i < 4; i++) begin
      rd_set = SET_W'(i);
      #1;
      checks++;
      if (rd_cnt !== m_cnt[i] || rd_dest !== m_dest[i]) begin
        failures++;
        $display("FAIL stored set %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
