// acc_swe_div -- floating-point divider accelerator of the SWE special
// instruction (SWE-DIV).
//
// The paper names the accelerator and its function only. This version is the
// simplest sequential divider: a restoring division of the two 24-bit
// significands that produces one quotient bit per clock, after special-case
// handling (NaN, infinity, zero). Subnormals are read as zero and the quotient
// is truncated, like the other floating-point units of this design.
//
// Opcodes (own encoding; 0 = idle):
//   1 DIV  start in0 / in1 (restarts a division in progress)
//   2 RD   out <- quotient; the accelerator stalls the fabric while busy
// Timing: 24 iteration clocks and one packing clock follow DIV; an RD issued
// right after DIV stalls for 25 clocks, one issued 26 clocks after DIV does not. cond = {0, busy}. err pulses in the clock after an RD
// that returned a NaN (0/0, inf/inf or a NaN operand).
module acc_swe_div
  import fp32_pkg::*;
(
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

  localparam logic [3:0] D_DIV = 4'd1, D_RD = 4'd2;

  logic        busy_q, sign_q;
  logic [4:0]  step_q;
  logic [24:0] rem_q;
  logic [23:0] den_q, quo_q;
  logic [9:0]  exp_q;          // signed biased exponent of the quotient
  logic [31:0] res_q, out_q;
  logic [24:0] rem_sh;
  logic [24:0] na, nb;
  logic        a_lt_b;

  assign na     = {1'b0, 1'b1, in0[22:0]};
  assign nb     = {1'b0, 1'b1, in1[22:0]};
  assign a_lt_b = na < nb;
  assign rem_sh = rem_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      sign_q <= 1'b0;
      step_q <= '0;
      rem_q  <= '0;
      den_q  <= '0;
      quo_q  <= '0;
      exp_q  <= '0;
      res_q  <= '0;
      out_q  <= '0;
      err    <= 1'b0;
    end else begin
      err <= 1'b0;
      if (en && op == D_DIV) begin
        sign_q <= in0[31] ^ in1[31];
        step_q <= 5'd0;
        if (is_nan(in0) || is_nan(in1) || (is_inf(in0) && is_inf(in1)) ||
            (is_zero(in0) && is_zero(in1))) begin
          res_q <= QNAN;  busy_q <= 1'b0;
        end else if (is_inf(in0) || is_zero(in1)) begin
          res_q <= {in0[31] ^ in1[31], 8'hFF, 23'd0}; busy_q <= 1'b0;
        end else if (is_zero(in0) || is_inf(in1)) begin
          res_q <= {in0[31] ^ in1[31], 31'd0}; busy_q <= 1'b0;
        end else begin
          // normalise so that the first quotient bit is 1
          rem_q  <= a_lt_b ? (na << 1) : na;
          den_q  <= nb[23:0];
          exp_q  <= 10'(int'(in0[30:23]) - int'(in1[30:23]) + 127 - (a_lt_b ? 1 : 0));
          quo_q  <= '0;
          step_q <= 5'd0;
          busy_q <= 1'b1;
        end
      end else if (busy_q) begin
        if (rem_sh >= {1'b0, den_q}) begin
          quo_q <= {quo_q[22:0], 1'b1};
          rem_q <= (rem_sh - {1'b0, den_q}) << 1;
        end else begin
          quo_q <= {quo_q[22:0], 1'b0};
          rem_q <= rem_sh << 1;
        end
        step_q <= step_q + 1'b1;
        if (step_q == 5'd23) busy_q <= 1'b0;
      end else if (step_q == 5'd24) begin
        // pack the finished quotient
        if ($signed(exp_q) >= 255)    res_q <= {sign_q, 8'hFF, 23'd0};
        else if ($signed(exp_q) <= 0) res_q <= {sign_q, 31'd0};
        else                          res_q <= {sign_q, exp_q[7:0], quo_q[22:0]};
        step_q <= 5'd0;
      end
      if (en && op == D_RD && !stall) begin
        out_q <= res_q;
        err   <= is_nan(res_q);
      end
    end
  end

  // busy until the quotient is packed
  assign stall = (op == D_RD) && (busy_q || step_q == 5'd24);
  assign out0  = out_q;
  assign out1  = out_q;
  assign cond  = {1'b0, busy_q || step_q == 5'd24};

endmodule
