// acc_swe_sqrt -- floating-point square-root accelerator of the SWE special
// instruction (SWE-SQRT).
//
// The paper names the accelerator and its function only. This version is the
// simplest sequential unit: a restoring (digit-by-digit) integer square root of
// the significand, one result bit per clock. For an input 1.m * 2^E the
// radicand is the significand shifted so that E becomes even; the root's
// exponent is E/2. Subnormals read as zero, the root is truncated.
//
// Opcodes (own encoding; 0 = idle):
//   1 SQRT start sqrt(in0) (restarts a computation in progress)
//   2 RD   out <- root; the accelerator stalls the fabric while busy
// Timing: 24 iteration clocks and one packing clock after SQRT; an RD issued
// 26 clocks after SQRT does not stall. cond = {0, busy}. err pulses in the
// clock after an RD that returned a NaN (negative or NaN input).
module acc_swe_sqrt
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

  localparam logic [3:0] Q_SQRT = 4'd1, Q_RD = 4'd2;

  logic        busy_q, pack_q;
  logic [4:0]  step_q;
  logic [47:0] rad_q;          // radicand, consumed two bits per clock
  logic [26:0] rem_q;
  logic [23:0] root_q;
  logic [7:0]  exp_q;
  logic [31:0] res_q, out_q;
  logic [26:0] rem_n, trial;
  int          e_unb;

  assign e_unb = int'(in0[30:23]) - 127;
  assign rem_n = {rem_q[24:0], rad_q[47:46]};
  assign trial = {1'b0, root_q, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      pack_q <= 1'b0;
      step_q <= '0;
      rad_q  <= '0;
      rem_q  <= '0;
      root_q <= '0;
      exp_q  <= '0;
      res_q  <= '0;
      out_q  <= '0;
      err    <= 1'b0;
    end else begin
      err    <= 1'b0;
      pack_q <= 1'b0;
      if (en && op == Q_SQRT) begin
        busy_q <= 1'b0;
        if (is_nan(in0) || (in0[31] && !is_zero(in0))) res_q <= QNAN;
        else if (is_zero(in0))                         res_q <= {in0[31], 31'd0};
        else if (is_inf(in0))                          res_q <= in0;
        else begin
          // odd exponent: take one more significand bit into the radicand
          rad_q  <= e_unb[0] ? {{1'b1, in0[22:0]}, 24'd0} : {1'b0, {1'b1, in0[22:0]}, 23'd0};
          exp_q  <= 8'((e_unb[0] ? e_unb - 1 : e_unb) / 2 + 127);
          rem_q  <= '0;
          root_q <= '0;
          step_q <= '0;
          busy_q <= 1'b1;
        end
      end else if (busy_q) begin
        if (rem_n >= trial) begin
          rem_q  <= rem_n - trial;
          root_q <= {root_q[22:0], 1'b1};
        end else begin
          rem_q  <= rem_n;
          root_q <= {root_q[22:0], 1'b0};
        end
        rad_q  <= rad_q << 2;
        step_q <= step_q + 1'b1;
        if (step_q == 5'd23) begin
          busy_q <= 1'b0;
          pack_q <= 1'b1;
        end
      end else if (pack_q) begin
        res_q <= {1'b0, exp_q, root_q[22:0]};
      end
      if (en && op == Q_RD && !stall) begin
        out_q <= res_q;
        err   <= is_nan(res_q);
      end
    end
  end

  assign stall = (op == Q_RD) && (busy_q || pack_q);
  assign out0  = out_q;
  assign out1  = out_q;
  assign cond  = {1'b0, busy_q || pack_q};

endmodule
