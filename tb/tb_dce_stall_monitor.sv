// tb_dce_stall_monitor -- checks that the stall watchdog fires in exactly the
// 512th consecutive stalled clock, not earlier, and restarts when stall drops.
module tb_dce_stall_monitor;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, active = 0, stall = 0, limit_hit;
  int hits, first_hit;

  dce_stall_monitor #(.LIMIT(512)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_stall(input int len, output int nhit, output int first);
    nhit = 0; first = -1;
    for (int c = 1; c <= len; c++) begin
      @(negedge clk);
      stall = 1;
      #1;
      if (limit_hit) begin
        nhit++;
        if (first < 0) first = c;
      end
    end
    @(negedge clk);
    stall = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    active = 1;
    // 511 stalled clocks: no trap
    run_stall(511, hits, first_hit);
    checks++; if (hits != 0) begin failures++; $display("FAIL early hit"); end
    // stall low for a clock restarts the count; 600 stalled clocks: trap at 512
    run_stall(600, hits, first_hit);
    checks++; if (first_hit != 512) begin failures++; $display("FAIL first hit at %0d", first_hit); end
    // inactive controller never traps
    active = 0;
    run_stall(700, hits, first_hit);
    checks++; if (hits != 0) begin failures++; $display("FAIL hit while inactive"); end
    active = 1;
    run_stall(512, hits, first_hit);
    checks++; if (hits != 1 || first_hit != 512) begin failures++; $display("FAIL second window %0d %0d", hits, first_hit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
