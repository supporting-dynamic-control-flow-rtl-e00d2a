// acc_fmav -- floating-point add/multiply accelerator (SIFT-FMAV, SWE-FMAV).
//
// The paper's accelerator holds one floating-point adder and one floating-point
// multiplier, input multiplexers that take each operand from the accelerator
// inputs or from stored values, a result multiplexer, an output register
// (outreg) and a save register (savereg) that keeps the running sum until the
// computation is complete. The same accelerator serves SIFT-match (subtract,
// square, accumulate per feature) and the SWE solvers.
//
// Sub-instruction opcodes (own encoding; 0 = idle):
//   1 ADD  out  <- in0 + in1        2 SUB  out  <- in0 - in1
//   3 MUL  out  <- in0 * in1        4 SQR  out  <- out * out
//   5 ACC  save <- save + out       6 CLR  save <- 0
//   7 RD   out  <- save             8 PASS out  <- in0
//   9 MACC save <- save + in0 (add an input to the sum)
// Timing: an op issued with en in one clock has its result in outreg/savereg
// in the next clock (the floating-point units are combinational here, the
// paper's IP cores are pipelined behind control shift registers). output1
// carries the same value as output0, as both hang on one net in the paper's
// drawing. err pulses for one clock when an op produced a NaN (paper: an
// accelerator error "e.g., returns a NaN" traps). The accelerator has no
// condition output, so cond is 0; it never stalls.
module acc_fmav
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

  typedef enum logic [3:0] {
    F_NOP = 4'd0, F_ADD = 4'd1, F_SUB = 4'd2, F_MUL = 4'd3, F_SQR = 4'd4,
    F_ACC = 4'd5, F_CLR = 4'd6, F_RD  = 4'd7, F_PASS = 4'd8, F_MACC = 4'd9
  } fop_e;

  logic [31:0] out_q, save_q;
  logic [31:0] add_a, add_b, mul_a, mul_b, add_r, mul_r, res;
  logic        add_neg, use_mul, wr_out, wr_save;
  fop_e        fop;

  assign fop = fop_e'(op);

  // input multiplexers and unit control
  always_comb begin
    add_a   = in0;
    add_b   = in1;
    add_neg = 1'b0;
    mul_a   = in0;
    mul_b   = in1;
    use_mul = 1'b0;
    wr_out  = 1'b0;
    wr_save = 1'b0;
    res     = add_r;
    unique case (fop)
      F_ADD:  wr_out = 1'b1;
      F_SUB:  begin add_neg = 1'b1; wr_out = 1'b1; end
      F_MUL:  begin use_mul = 1'b1; wr_out = 1'b1; end
      F_SQR:  begin mul_a = out_q; mul_b = out_q; use_mul = 1'b1; wr_out = 1'b1; end
      F_ACC:  begin add_a = save_q; add_b = out_q; wr_save = 1'b1; end
      F_MACC: begin add_a = save_q; add_b = in0; wr_save = 1'b1; end
      F_CLR:  wr_save = 1'b1;
      F_RD:   wr_out = 1'b1;
      F_PASS: wr_out = 1'b1;
      default: ;
    endcase
    if (use_mul)       res = mul_r;
    if (fop == F_CLR)  res = 32'd0;
    if (fop == F_RD)   res = save_q;
    if (fop == F_PASS) res = in0;
  end

  assign add_r = fadd(add_a, add_neg ? {~add_b[31], add_b[30:0]} : add_b);
  assign mul_r = fmul(mul_a, mul_b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q  <= '0;
      save_q <= '0;
      err    <= 1'b0;
    end else begin
      err <= 1'b0;
      if (en) begin
        if (wr_out)  out_q  <= res;
        if (wr_save) save_q <= res;
        err <= (wr_out || wr_save) && is_nan(res);
      end
    end
  end

  assign out0  = out_q;
  assign out1  = out_q;
  assign cond  = 2'b00;
  assign stall = 1'b0;

endmodule
