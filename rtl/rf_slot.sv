// rf_slot -- one accelerator slot of the reconfigurable fabric.
//
// A slot offers every accelerator the same interface: a 4-bit sub-instruction
// opcode with an issue strobe (en), two 32-bit operands, two 32-bit outputs, a
// 2-bit condition signal for accelerator-conditioned jumps, a stall request
// and an error flag. On the FPGA the slot's contents are exchanged at run time
// by partial reconfiguration; here the KIND parameter selects which
// accelerator the slot holds. An empty slot (ACC_NONE) drives zeros.
// Timing is that of the accelerator held.
module rf_slot
  import dce_pkg::*;
#(
  parameter acc_kind_e   KIND   = ACC_FMAV,
  parameter int unsigned LINE_W = 1024,   // CNN line buffers
  parameter int unsigned BUF_D  = 2048    // SHA-Buff depth
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

  generate
    case (KIND)
      ACC_FMAV: begin : g_fmav
        acc_fmav     u_acc (.*);
      end
      ACC_UTIL: begin : g_util
        acc_swe_util u_acc (.*);
      end
      ACC_DIV: begin : g_div
        acc_swe_div  u_acc (.*);
      end
      ACC_SQRT: begin : g_sqrt
        acc_swe_sqrt u_acc (.*);
      end
      ACC_CNN_MAC: begin : g_cnn_mac
        acc_cnn_mac  #(.LINE_W(LINE_W)) u_acc (.*);
      end
      ACC_CNN_SUM: begin : g_cnn_sum
        acc_cnn_sum  #(.LINE_W(LINE_W)) u_acc (.*);
      end
      ACC_SHA_BUFF: begin : g_sha_buff
        acc_sha_buff #(.DEPTH(BUF_D))   u_acc (.*);
      end
      ACC_SHA_COMP: begin : g_sha_comp
        acc_sha_comp u_acc (.*);
      end
      default: begin : g_empty
        assign out0  = '0;
        assign out1  = '0;
        assign cond  = '0;
        assign stall = 1'b0;
        assign err   = 1'b0;
      end
    endcase
  endgenerate

endmodule
