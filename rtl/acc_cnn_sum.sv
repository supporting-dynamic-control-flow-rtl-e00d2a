// acc_cnn_sum -- CNN-SUM accelerator: activation, 2x2 max pooling and
// quantization of a stream of convolution sums.
//
// The paper gives this accelerator's function (activation, pooling and
// quantization, with line buffers fed by streaming) but not its insides. This
// is the simplest block with that function: every value pushed passes a ReLU;
// on even rows the maximum of each horizontal pair is kept in a line buffer of
// LINE_W/2 entries; on odd rows the pair maximum is combined with the stored
// one, giving the maximum of a 2x2 window, which is shifted right by a
// configurable amount and saturated to an unsigned 8-bit value.
//
// Opcodes (own encoding; 0 = idle):
//   1 CFG   line width <- in0[..], quantization shift <- in1[4:0]; clears position
//   2 PUSH  value in0 (signed 32-bit)
// cond = {0, valid}: valid for one op after a PUSH that completed a 2x2 window;
// out0 then holds the 8-bit result (zero-extended). Timing: one clock after the
// op. ReLU is applied before pooling; both commute with max, so the result is
// the same in the order of the paper's step list (pooling, then activation and
// quantization). Never stalls, never reports an error.
module acc_cnn_sum #(
  parameter int unsigned LINE_W = 1024   // longest input line (values)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [3:0]  op,
  input  logic [31:0] in0,
  input  logic [31:0] in1,
  output logic [31:0] out0,
  output logic [31:0] out1,
  output logic [1:0]  cond,
  output logic        stall,
  output logic        err
);

  localparam int unsigned CW = $clog2(LINE_W + 1);
  localparam int unsigned AW = $clog2(LINE_W / 2);
  localparam logic [3:0] S_CFG = 4'd1, S_PUSH = 4'd2;

  logic [31:0]   lb [LINE_W/2];
  logic [CW-1:0] width_q, col_q;
  logic          odd_row_q, valid_q;
  logic [4:0]    shift_q;
  logic [31:0]   hold_q, out_q;
  logic [31:0]   relu, pair, quad, shifted;
  logic [AW-1:0] pidx;

  assign relu    = in0[31] ? 32'd0 : in0;
  assign pair    = (hold_q > relu) ? hold_q : relu;
  assign pidx    = col_q[AW:1];
  assign quad    = (lb[pidx] > pair) ? lb[pidx] : pair;
  assign shifted = quad >> shift_q;

  always_ff @(posedge clk) begin
    if (en && op == S_PUSH && col_q[0] && !odd_row_q) lb[pidx] <= pair;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      width_q   <= CW'(LINE_W);
      col_q     <= '0;
      odd_row_q <= 1'b0;
      valid_q   <= 1'b0;
      shift_q   <= '0;
      hold_q    <= '0;
      out_q     <= '0;
    end else if (en) begin
      valid_q <= 1'b0;
      unique case (op)
        S_CFG: begin
          width_q   <= in0[CW-1:0];
          shift_q   <= in1[4:0];
          col_q     <= '0;
          odd_row_q <= 1'b0;
        end
        S_PUSH: begin
          hold_q <= relu;
          if (col_q[0] && odd_row_q) begin
            out_q   <= (shifted > 32'd255) ? 32'd255 : shifted;
            valid_q <= 1'b1;
          end
          if (col_q == width_q - 1'b1) begin
            col_q     <= '0;
            odd_row_q <= !odd_row_q;
          end else begin
            col_q <= col_q + 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  assign out0  = out_q;
  assign out1  = out_q;
  assign cond  = {1'b0, valid_q};
  assign stall = 1'b0;
  assign err   = 1'b0;

endmodule
