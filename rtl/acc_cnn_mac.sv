// acc_cnn_mac -- CNN-MAC accelerator: 3x3 convolution fed by three line buffers.
//
// Pixels of one input channel stream in row by row, one per PUSH. Three line
// buffers (block RAMs in the paper) rotate: the newest row is written into one
// buffer while the two others hold the two rows above it. At every PUSH the
// pixel of the two older rows at the same column is read, the three pixels of
// that column enter a 3x3 window of registers, and the nine products of the
// window with the loaded filter are summed. Once a full 3x3 window exists
// (third row, third column onward) the sum is valid. PUSHA adds input1 to the
// sum, which lets a microcode loop accumulate partial sums over an arbitrary
// number of input channels, the reason the CNN SI needs dynamic control flow.
//
// Opcodes (own encoding; 0 = idle):
//   1 CFG   line width <- in0[..]; clears row/column position
//   2 LDW   filter shift-in: w[8] <- in0[7:0], w[k] <- w[k+1] (nine LDWs load
//           w0..w8, raster order, w0 top-left)
//   3 PUSH  pixel in0[7:0]; out <- window . filter
//   4 PUSHA pixel in0[7:0]; out <- in1 + window . filter
//   5 LDP   partial sum <- in0 (a sum carried over from earlier channels)
//   6 PUSHP pixel in0[7:0]; out <- partial sum + window . filter
// LDP/PUSHP let a partial sum and a pixel arrive in two successive VLIWs on
// the same 32-bit memory stream.
// cond = {end_of_line, valid}: valid when out holds a full-window result.
// Timing: out and cond update one clock after the op. Pixels and weights are
// signed 8-bit, sums 32-bit (own choices; the paper gives no widths). The line
// buffers are read combinationally (distributed-RAM style) for brevity; the
// rotation scheme follows the paper's line-buffer drawing. Never stalls.
module acc_cnn_mac #(
  parameter int unsigned LINE_W = 1024   // longest image line (pixels)
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
  localparam int unsigned AW = $clog2(LINE_W);
  localparam logic [3:0] M_CFG = 4'd1, M_LDW = 4'd2, M_PUSH = 4'd3, M_PUSHA = 4'd4,
                         M_LDP = 4'd5, M_PUSHP = 4'd6;

  logic [7:0]        lb0 [LINE_W];
  logic [7:0]        lb1 [LINE_W];
  logic [7:0]        lb2 [LINE_W];
  logic [1:0]        wsel_q;                 // buffer receiving the newest row
  logic [CW-1:0]     width_q, col_q;
  logic [1:0]        rows_q;                 // complete rows seen, saturating at 2
  logic signed [7:0] w_q   [9];
  logic signed [7:0] win_q [3][3];           // [row 0 = oldest][column 0 = leftmost]
  logic signed [7:0] col_new [3];
  logic signed [7:0] wn [3][3];
  logic [7:0]        rd_a, rd_b;             // row-2 and row-1 pixel at col_q
  logic signed [31:0] dot;
  logic [31:0]       out_q, part_q;
  logic              valid_q, eol_q, push, last_col;

  assign push     = en && (op == M_PUSH || op == M_PUSHA || op == M_PUSHP);
  assign last_col = (col_q == width_q - 1'b1);

  // buffers holding the rows above the newest one
  always_comb begin
    unique case (wsel_q)
      2'd0:    begin rd_a = lb1[col_q[AW-1:0]]; rd_b = lb2[col_q[AW-1:0]]; end
      2'd1:    begin rd_a = lb2[col_q[AW-1:0]]; rd_b = lb0[col_q[AW-1:0]]; end
      default: begin rd_a = lb0[col_q[AW-1:0]]; rd_b = lb1[col_q[AW-1:0]]; end
    endcase
  end

  always_comb begin
    col_new[0] = signed'(rd_a);
    col_new[1] = signed'(rd_b);
    col_new[2] = signed'(in0[7:0]);
    for (int r = 0; r < 3; r++) begin
      wn[r][0] = win_q[r][1];
      wn[r][1] = win_q[r][2];
      wn[r][2] = col_new[r];
    end
    dot = '0;
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        dot += 32'(wn[r][c]) * 32'(w_q[3*r+c]);
  end

  always_ff @(posedge clk) begin
    if (push) begin
      unique case (wsel_q)
        2'd0:    lb0[col_q[AW-1:0]] <= in0[7:0];
        2'd1:    lb1[col_q[AW-1:0]] <= in0[7:0];
        default: lb2[col_q[AW-1:0]] <= in0[7:0];
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wsel_q  <= '0;
      width_q <= CW'(LINE_W);
      col_q   <= '0;
      rows_q  <= '0;
      out_q   <= '0;
      part_q  <= '0;
      valid_q <= 1'b0;
      eol_q   <= 1'b0;
      for (int k = 0; k < 9; k++) w_q[k] <= '0;
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win_q[r][c] <= '0;
    end else if (en) begin
      unique case (op)
        M_CFG: begin
          width_q <= in0[CW-1:0];
          col_q   <= '0;
          rows_q  <= '0;
          wsel_q  <= '0;
          valid_q <= 1'b0;
          eol_q   <= 1'b0;
        end
        M_LDW: begin
          for (int k = 0; k < 8; k++) w_q[k] <= w_q[k+1];
          w_q[8] <= signed'(in0[7:0]);
        end
        M_LDP: part_q <= in0;
        M_PUSH, M_PUSHA, M_PUSHP: begin
          for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) win_q[r][c] <= wn[r][c];
          unique case (op)
            M_PUSHA: out_q <= in1 + 32'(dot);
            M_PUSHP: out_q <= part_q + 32'(dot);
            default: out_q <= 32'(dot);
          endcase
          valid_q <= (rows_q == 2'd2) && (col_q >= 2);
          eol_q   <= last_col;
          if (last_col) begin
            col_q  <= '0;
            wsel_q <= (wsel_q == 2'd2) ? 2'd0 : wsel_q + 1'b1;
            if (rows_q != 2'd2) rows_q <= rows_q + 1'b1;
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
  assign cond  = {eol_q, valid_q};
  assign stall = 1'b0;
  assign err   = 1'b0;

endmodule
