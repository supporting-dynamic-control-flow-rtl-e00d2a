// rp_top -- reconfigurable processor fabric with dynamic control flow: the
// fabric execution controller and the reconfigurable fabric it drives.
//
// The host CPU, the system memory and the communication bus of the target
// system are outside this top. Their connections are plain ports:
//   * microcode load port: the CPU writes VLIWs into the controller;
//   * SI port: start with first/last VLIW address and two register operands;
//     done with a 32-bit result, or trap with cause, user value and address;
//   * memory read stream: data words with a valid flag, taken with stream_pop;
//   * memory write stream: wr_data with wr_valid, held off by wr_ready.
// One VLIW issues per clock unless the fabric stalls. The default slot set-up
// is the SWE fabric (two FMAV, DIV, SQRT, UTIL), the one evaluated set-up that
// fills all five slots; the other SIs use other SLOT_KIND values.
module rp_top
  import dce_pkg::*;
#(
  parameter slot_cfg_t   SLOT_KIND = CFG_SWE,
  parameter int unsigned UC_DEPTH  = 1 << ADDR_W,
  parameter int unsigned STALL_LIM = STALL_LIMIT,
  parameter int unsigned LINE_W    = 1024,
  parameter int unsigned BUF_D     = 2048
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               uc_we,
  input  logic [ADDR_W-1:0]  uc_waddr,
  input  vliw_t              uc_wdata,
  input  logic               si_start,
  input  logic [ADDR_W-1:0]  si_first,
  input  logic [ADDR_W-1:0]  si_last,
  input  logic [DATA_W-1:0]  si_opa,
  input  logic [DATA_W-1:0]  si_opb,
  output logic               si_busy,
  output logic               si_done,
  output logic [DATA_W-1:0]  si_result,
  output logic               si_trap,
  output trap_e              si_trap_cause,
  output logic [UTRAP_W-1:0] si_trap_value,
  output logic [ADDR_W-1:0]  si_trap_pc,
  input  logic [DATA_W-1:0]  stream_data,
  input  logic               stream_valid,
  output logic               stream_pop,
  output logic [DATA_W-1:0]  wr_data,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic               fab_stall   // for observation
);

  vliw_t                         vliw;
  logic                          issue;
  logic [NSLOTS-1:0]             err;
  logic [NSLOTS-1:0][COND_W-1:0] cond;
  logic [DATA_W-1:0]             res;

  fabric_exec_controller #(.DEPTH(UC_DEPTH), .STALL_LIM(STALL_LIM)) u_ctrl (
    .clk, .rst_n,
    .uc_we, .uc_waddr, .uc_wdata,
    .si_start, .si_first, .si_last,
    .busy      (si_busy),
    .done      (si_done),
    .result    (si_result),
    .trap      (si_trap),
    .trap_cause(si_trap_cause),
    .trap_value(si_trap_value),
    .trap_pc   (si_trap_pc),
    .vliw, .issue,
    .fab_stall,
    .fab_err   (err),
    .fab_cond  (cond),
    .fab_res   (res)
  );

  reconf_fabric #(.SLOT_KIND(SLOT_KIND), .LINE_W(LINE_W), .BUF_D(BUF_D)) u_fab (
    .clk, .rst_n,
    .vliw, .issue,
    .opa(si_opa), .opb(si_opb),
    .stream_data, .stream_valid, .stream_pop,
    .wr_data, .wr_valid, .wr_ready,
    .stall(fab_stall),
    .err, .cond, .res
  );

endmodule
