// tb_acc_cnn_sum -- self-checking test of CNN-SUM: streams random signed sums
// of a 6x8 map and checks each 2x2 max-pooled, ReLU-activated, shifted and
// saturated 8-bit output against a reference computed in the testbench, for
// two quantization shifts.
module tb_acc_cnn_sum;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;
  int nout;

  acc_cnn_sum #(.LINE_W(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_op(input logic [3:0] o, input logic [31:0] a, input logic [31:0] b);
    @(negedge clk);
    en = 1; op = o; in0 = a; in1 = b;
    @(negedge clk);
    en = 0; op = 0;
  endtask
  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic run_map(input int rows, input int cols, input int sh);
    int m [8][16];
    int mx, q;
    do_op(4'd1, cols, sh);
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++) begin
        m[r][c] = $urandom_range(0, 4000) - 1500;
        do_op(4'd2, 32'(m[r][c]), 0);
        if (r % 2 == 1 && c % 2 == 1) begin
          mx = 0;
          for (int i = 0; i < 2; i++)
            for (int j = 0; j < 2; j++)
              if (m[r-1+i][c-1+j] > mx) mx = m[r-1+i][c-1+j];
          q = mx >> sh;
          if (q > 255) q = 255;
          check($sformatf("pool r%0d c%0d: %0d exp %0d", r, c, out0, q), cond[0] && out0 == 32'(q));
          nout++;
        end else begin
          check("no output", !cond[0]);
        end
      end
  endtask

  initial begin
    nout = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_map(6, 8, 2);
    run_map(4, 6, 4);
    check("output count", nout == 12 + 6);
    check("no stall, no error", !stall && !err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
