// dce_pkg -- shared types and constants of the dynamic control-flow extension.
//
// The fabric execution controller walks through the microcode of a special
// instruction (SI) one VLIW per clock. Each VLIW carries one sub-instruction per
// accelerator slot plus the control fields of the dynamic control flow:
//   * a jump sub-instruction (one of the ten kinds of the jump table), the 2-bit
//     number of the parameter set it uses, a 12-bit operand and a slot-select
//     mask for accelerator-conditioned jumps;
//   * a parameter-set command that loads a set (destination and counter) or
//     steps its counter;
//   * a 3-bit user trap value (0 = no trap);
//   * a result write (which fabric source goes to the SI result register), a
//     memory write (the same source goes out on the memory write stream) and
//     an end-of-SI flag.
// The ten jump kinds, the four parameter sets, the 12-bit counters, the 2-bit
// accelerator condition signals, the 3-bit user trap value and the 512-cycle
// stall limit follow the paper. The field order, the 4-bit jump encoding, the
// parameter-set commands, the 10-bit microcode address and the operand-source
// encoding are this design's own choices.
package dce_pkg;

  localparam int unsigned NSLOTS   = 5;    // accelerator slots of the fabric
  localparam int unsigned ADDR_W   = 10;   // microcode address width (1024 VLIWs)
  localparam int unsigned CNT_W    = 12;   // counter of a parameter set
  localparam int unsigned NSETS    = 4;    // parameter sets in the controller
  localparam int unsigned SET_W    = 2;    // bits to name a parameter set
  localparam int unsigned DATA_W   = 32;   // single-precision data path
  localparam int unsigned OP_W     = 4;    // accelerator opcode width
  localparam int unsigned SRC_W    = 4;    // operand-source select width
  localparam int unsigned COND_W   = 2;    // accelerator condition signal
  localparam int unsigned UTRAP_W  = 3;    // user trap value
  localparam int unsigned STALL_LIMIT = 512;

  // Jump sub-instructions (Table I of the jump table).
  typedef enum logic [3:0] {
    NO_JMP         = 4'd0,
    ALW_JMP        = 4'd1,
    JMP_IF_CNT_EQ  = 4'd2,
    JMP_IF_CNT_NEQ = 4'd3,
    JMP_IF_CNT_LT  = 4'd4,
    JMP_IF_CNT_GT  = 4'd5,
    JMP_IF_ACC_EQ  = 4'd6,
    JMP_IF_ACC_NEQ = 4'd7,
    JMP_IF_ACC_LT  = 4'd8,
    JMP_IF_ACC_GT  = 4'd9
  } jmp_e;

  // Parameter-set commands.
  typedef enum logic [1:0] {
    PS_NONE = 2'd0,   // leave the set alone
    PS_LOAD = 2'd1,   // destination <- ps_dest, counter <- ps_cnt
    PS_INC  = 2'd2,   // counter + 1
    PS_DEC  = 2'd3    // counter - 1
  } ps_cmd_e;

  // Trap causes reported to the CPU.
  typedef enum logic [2:0] {
    TRAP_NONE     = 3'd0,
    TRAP_BAD_JUMP = 3'd1,   // jump target or fall-through outside the SI
    TRAP_ACC_ERR  = 3'd2,   // an accelerator flagged an error (e.g. NaN)
    TRAP_STALL    = 3'd3,   // VLIW held by stall for STALL_LIMIT cycles
    TRAP_USER     = 3'd4    // user trap command in the VLIW
  } trap_e;

  // Sub-instruction of one slot: opcode (0 = idle) and two operand sources.
  // Source encoding, with N = NSLOTS: 0..N-1 output0 of slot k, N..2N-1 output1
  // of slot k-N, 2N CPU operand A, 2N+1 CPU operand B, 2N+2 memory stream,
  // anything else zero.
  typedef struct packed {
    logic [OP_W-1:0]  op;
    logic [SRC_W-1:0] src0;
    logic [SRC_W-1:0] src1;
  } sub_instr_t;

  localparam logic [SRC_W-1:0] SRC_OPA    = SRC_W'(2*NSLOTS);
  localparam logic [SRC_W-1:0] SRC_OPB    = SRC_W'(2*NSLOTS+1);
  localparam logic [SRC_W-1:0] SRC_STREAM = SRC_W'(2*NSLOTS+2);
  localparam logic [SRC_W-1:0] SRC_ZERO   = SRC_W'(2*NSLOTS+3);

  typedef struct packed {
    sub_instr_t [NSLOTS-1:0] sub;
    jmp_e                    jmp;
    logic [SET_W-1:0]        jmp_set;
    logic [CNT_W-1:0]        jmp_val;
    logic [NSLOTS-1:0]       acc_sel;
    ps_cmd_e                 ps_cmd;
    logic [SET_W-1:0]        ps_set;
    logic [ADDR_W-1:0]       ps_dest;
    logic [CNT_W-1:0]        ps_cnt;
    logic [UTRAP_W-1:0]      utrap;
    logic                    res_wr;
    logic [SRC_W-1:0]        res_src;
    logic                    mem_wr;
    logic                    last;
  } vliw_t;

  localparam int unsigned VLIW_W = $bits(vliw_t);

  // Accelerator kinds a slot can hold. On the FPGA a slot is filled at run time
  // by partial reconfiguration; here the kind of each slot is an elaboration
  // parameter of the fabric.
  typedef enum logic [3:0] {
    ACC_NONE     = 4'd0,
    ACC_FMAV     = 4'd1,   // SIFT-FMAV / SWE-FMAV
    ACC_UTIL     = 4'd2,   // SWE-UTIL
    ACC_DIV      = 4'd3,   // SWE-DIV
    ACC_SQRT     = 4'd4,   // SWE-SQRT
    ACC_CNN_MAC  = 4'd5,
    ACC_CNN_SUM  = 4'd6,
    ACC_SHA_BUFF = 4'd7,
    ACC_SHA_COMP = 4'd8
  } acc_kind_e;

  typedef acc_kind_e [NSLOTS-1:0] slot_cfg_t;

  // Fabric set-ups of the four evaluated SIs (slot 0 first).
  localparam slot_cfg_t CFG_SWE  = {ACC_UTIL, ACC_SQRT, ACC_DIV, ACC_FMAV, ACC_FMAV};
  localparam slot_cfg_t CFG_SIFT = {ACC_NONE, ACC_FMAV, ACC_FMAV, ACC_FMAV, ACC_FMAV};
  localparam slot_cfg_t CFG_CNN  = {ACC_NONE, ACC_CNN_SUM, ACC_CNN_SUM, ACC_CNN_MAC, ACC_CNN_MAC};
  localparam slot_cfg_t CFG_SHA  = {ACC_NONE, ACC_SHA_COMP, ACC_SHA_COMP, ACC_SHA_BUFF, ACC_SHA_BUFF};

  // Common opcode: every accelerator treats 0 as idle.
  localparam logic [OP_W-1:0] OP_NOP = 4'd0;

endpackage
