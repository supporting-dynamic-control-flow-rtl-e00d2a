// dce_jump_unit -- decides whether the jump sub-instruction of the current VLIW
// is taken.
//
// Purely combinational. The ten jump kinds follow the paper's jump table:
//   NO_JMP never jumps, ALW_JMP always jumps;
//   JMP_IF_CNT_{EQ,NEQ,LT,GT} compare the counter of the named parameter set
//     with the 12-bit operand;
//   JMP_IF_ACC_{EQ,NEQ,LT,GT} compare the 2-bit condition signal of every slot
//     selected in acc_sel with the operand's two low bits and jump only if all
//     selected slots meet the condition (paper: "These jumps will only occur if
//     the control signals of all selected accelerators meet the specified
//     criteria").
// Own choices: comparisons are unsigned; an accelerator jump with no slot
// selected is not taken; the counter seen here is the value after the
// parameter-set command of the same VLIW (see fabric_exec_controller).
module dce_jump_unit
  import dce_pkg::*;
#(
  parameter int unsigned N_SLOTS = NSLOTS
) (
  input  jmp_e                           jmp,
  input  logic [CNT_W-1:0]               cnt,      // counter of the jump's set
  input  logic [CNT_W-1:0]               val,      // operand of the jump
  input  logic [N_SLOTS-1:0]             acc_sel,  // slots that take part
  input  logic [N_SLOTS-1:0][COND_W-1:0] acc_cond, // condition signals
  output logic                           take
);

  logic             all_eq, all_neq, all_lt, all_gt;
  logic [COND_W-1:0] ref_c;

  assign ref_c = val[COND_W-1:0];

  always_comb begin
    all_eq  = 1'b1;
    all_neq = 1'b1;
    all_lt  = 1'b1;
    all_gt  = 1'b1;
    for (int k = 0; k < int'(N_SLOTS); k++) begin
      if (acc_sel[k]) begin
        if (!(acc_cond[k] == ref_c)) all_eq  = 1'b0;
        if (!(acc_cond[k] != ref_c)) all_neq = 1'b0;
        if (!(acc_cond[k] <  ref_c)) all_lt  = 1'b0;
        if (!(acc_cond[k] >  ref_c)) all_gt  = 1'b0;
      end
    end
  end

  always_comb begin
    unique case (jmp)
      NO_JMP:         take = 1'b0;
      ALW_JMP:        take = 1'b1;
      JMP_IF_CNT_EQ:  take = (cnt == val);
      JMP_IF_CNT_NEQ: take = (cnt != val);
      JMP_IF_CNT_LT:  take = (cnt <  val);
      JMP_IF_CNT_GT:  take = (cnt >  val);
      JMP_IF_ACC_EQ:  take = (|acc_sel) && all_eq;
      JMP_IF_ACC_NEQ: take = (|acc_sel) && all_neq;
      JMP_IF_ACC_LT:  take = (|acc_sel) && all_lt;
      JMP_IF_ACC_GT:  take = (|acc_sel) && all_gt;
      default:        take = 1'b0;
    endcase
  end

endmodule
