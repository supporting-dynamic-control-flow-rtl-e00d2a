// acc_swe_util -- utility accelerator of the SWE special instruction.
//
// Following the paper's drawing, the accelerator has one floating-point
// comparator and one absolute-value unit, both fed straight from the inputs.
// The comparator result drives the 2-bit condition output (cond_out) used by
// the controller's accelerator-conditioned jumps, and a min/max multiplexer
// picks the smaller or larger of the (delayed) inputs. A result multiplexer
// chooses between min/max and the registered absolute value of input0 for the
// output register; output0 and output1 carry the same value.
//
// Opcodes (own encoding; 0 = idle):
//   1 CMP  cond <- compare(in0, in1), output unchanged
//   2 MIN  out  <- min(in0, in1), cond updated
//   3 MAX  out  <- max(in0, in1), cond updated
//   4 ABS  out  <- |in0|
// cond encoding (own choice): 0 equal, 1 in0 < in1, 2 in0 > in1, 3 unordered.
// Timing: result and cond appear one clock after the op issues and cond holds
// until the next compare. err pulses when an input of CMP/MIN/MAX or the ABS
// result is a NaN. Never stalls.
module acc_swe_util
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

  localparam logic [3:0] U_CMP = 4'd1, U_MIN = 4'd2, U_MAX = 4'd3, U_ABS = 4'd4;

  logic [1:0]  cmp_r, cond_q;
  logic [31:0] minmax, out_q;
  logic        is_cmp;

  assign cmp_r  = fcmp(in0, in1);
  assign is_cmp = (op == U_CMP) || (op == U_MIN) || (op == U_MAX);

  always_comb begin
    if (op == U_MIN) minmax = (cmp_r == CMP_GT) ? in1 : in0;
    else             minmax = (cmp_r == CMP_LT) ? in1 : in0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q  <= '0;
      cond_q <= CMP_EQ;
      err    <= 1'b0;
    end else begin
      err <= 1'b0;
      if (en) begin
        if (is_cmp) begin
          cond_q <= cmp_r;
          err    <= (cmp_r == CMP_UN);
        end
        if (op == U_MIN || op == U_MAX) out_q <= minmax;
        if (op == U_ABS) begin
          out_q <= fabs(in0);
          err   <= is_nan(in0);
        end
      end
    end
  end

  assign out0  = out_q;
  assign out1  = out_q;
  assign cond  = cond_q;
  assign stall = 1'b0;

endmodule
