// tb_acc_cnn_mac -- self-checking test of CNN-MAC: loads a random 3x3 filter,
// streams three random 8-bit images (widths 8, 5 and 6) through the rotating line
// buffers and checks every output against a directly computed convolution,
// plus the valid/end-of-line flags and partial-sum accumulation (PUSHA, and
// LDP followed by PUSHP).
module tb_acc_cnn_mac;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0;
  logic [3:0] op = 0;
  logic [31:0] in0 = 0, in1 = 0, out0, out1;
  logic [1:0] cond;
  logic stall, err;
  int valid_seen;

  acc_cnn_mac #(.LINE_W(16)) dut (.*);
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

  task automatic image(input int rows, input int cols, input int accum);
    int img [8][16];
    int w [9];
    int exp_v, part;
    do_op(4'd1, cols, 0);
    for (int k = 0; k < 9; k++) begin
      w[k] = $urandom_range(0, 255) - 128;
      do_op(4'd2, 32'(w[k]) & 32'hFF, 0);
    end
    for (int r = 0; r < rows; r++)
      for (int c = 0; c < cols; c++) begin
        img[r][c] = $urandom_range(0, 255) - 128;
        part = (accum != 0) ? $urandom_range(0, 100000) : 0;
        if (accum == 2) begin
          // partial sum first (LDP), then the pixel (PUSHP)
          do_op(4'd5, 32'(part), 32'hDEAD);
          do_op(4'd6, 32'(img[r][c]) & 32'hFF, 32'hBEEF);
        end else
          do_op((accum == 1) ? 4'd4 : 4'd3, 32'(img[r][c]) & 32'hFF, 32'(part));
        check("end-of-line flag", cond[1] == (c == cols - 1));
        if (r >= 2 && c >= 2) begin
          exp_v = part;
          for (int i = 0; i < 3; i++)
            for (int j = 0; j < 3; j++)
              exp_v += img[r-2+i][c-2+j] * w[3*i+j];
          check($sformatf("conv r%0d c%0d: %0d exp %0d", r, c, $signed(out0), exp_v),
                cond[0] && $signed(out0) == exp_v);
          valid_seen++;
        end else begin
          check("not valid before a full window", !cond[0]);
        end
      end
  endtask

  initial begin
    valid_seen = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    image(7, 8, 0);
    image(6, 5, 1);
    image(5, 6, 2);
    check("outputs produced", valid_seen == 5*6 + 4*3 + 3*4);
    check("no stall, no error", !stall && !err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
