// tb_dce_jump_unit -- self-checking test of the jump decision logic.
// Drives random jump kinds, counters, operands, slot masks and condition
// signals and compares `take` with a reference written from the jump table.
module tb_dce_jump_unit;
  import dce_pkg::*;

  int checks = 0, failures = 0;
  jmp_e                          jmp;
  logic [CNT_W-1:0]              cnt, val;
  logic [NSLOTS-1:0]             sel;
  logic [NSLOTS-1:0][COND_W-1:0] cnd;
  logic                          take;
  int                            taken_cnt [10];

  dce_jump_unit dut (.jmp, .cnt, .val, .acc_sel(sel), .acc_cond(cnd), .take);

  function automatic logic ref_take(int j);
    logic ok;
    bit any;
    any = 0;
    ok = 1;
    case (j)
      0: return 0;
      1: return 1;
      2: return cnt == val;
      3: return cnt != val;
      4: return cnt < val;
      5: return cnt > val;
      default: begin
        for (int k = 0; k < NSLOTS; k++) if (sel[k]) begin
          int c, v;
          any = 1;
          c = cnd[k]; v = val[1:0];
          case (j)
            6: if (!(c == v)) ok = 0;
            7: if (!(c != v)) ok = 0;
            8: if (!(c <  v)) ok = 0;
            default: if (!(c > v)) ok = 0;
          endcase
        end
        return any && ok;
      end
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 10; i++) taken_cnt[i] = 0;
    for (int n = 0; n < 4000; n++) begin
      int j;
      j   = n % 10;
      jmp = jmp_e'(j);
      cnt = CNT_W'($urandom_range(0, 7));
      val = (n % 3 == 0) ? cnt : CNT_W'($urandom_range(0, 7));
      sel = NSLOTS'($urandom);
      for (int k = 0; k < NSLOTS; k++) cnd[k] = (n % 4 == 0) ? val[1:0] : COND_W'($urandom);
      #1;
      checks++;
      if (take !== ref_take(j)) begin
        failures++;
        if (failures < 10) $display("FAIL jmp=%0d cnt=%0d val=%0d sel=%b take=%0b", j, cnt, val, sel, take);
      end
      if (take) taken_cnt[j]++;
    end
    // every conditional kind must have been taken and not taken at least once
    for (int j = 2; j < 10; j++) begin
      checks++;
      if (taken_cnt[j] == 0 || taken_cnt[j] == 400) begin
        failures++;
        $display("FAIL jump kind %0d never varied", j);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
