// fabric_exec_controller -- fabric execution controller with dynamic control flow.
//
// The CPU loads VLIW microcode into the controller's microcode memory and then
// starts a special instruction (SI) by giving the address of its first and last
// VLIW. The controller issues one VLIW per clock to the reconfigurable fabric:
// the slot sub-instructions go to the accelerators, and the control fields
// drive the dynamic control flow:
//   * parameter-set command -> dce_param_sets (four sets, 12-bit counters);
//   * jump sub-instruction  -> dce_jump_unit (counter and accelerator jumps);
//   * stall from the fabric -> the VLIW is held; dce_stall_monitor aborts the
//     SI after STALL_LIMIT stalled clocks;
//   * traps: an invalid jump target, an accelerator error, the stall limit and
//     the 3-bit user trap end the SI and are reported to the CPU, whose own
//     exception handling takes over (paper, exception support).
// The next VLIW is the jump destination when the jump is taken, otherwise the
// next address; a VLIW marked last ends the SI when it does not jump.
//
// Timing: the microcode memory is read synchronously at the address of the next
// VLIW, so jumps cost no bubble. Start is sampled in IDLE; the first VLIW issues
// one clock later. done or trap pulses for one clock in the clock after the
// last (or faulting) VLIW, with result/trap information held until the next SI.
//
// Own choices (the paper gives the function, not the insides): the control
// field layout (dce_pkg), absolute jump destinations checked against the SI's
// first and last address (paper: "An invalid jump target, that falls outside its
// permissible boundaries triggers a trap event"), running off the end of an SI
// without a last VLIW also traps as a bad jump, a trapping VLIW issues nothing,
// the trap priority accelerator error > stall limit > user trap > bad jump, and
// the single microcode memory of DEPTH VLIWs.
module fabric_exec_controller
  import dce_pkg::*;
#(
  parameter int unsigned DEPTH       = 1 << ADDR_W,
  parameter int unsigned STALL_LIM   = STALL_LIMIT
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // microcode load port (from the CPU over the bus)
  input  logic                           uc_we,
  input  logic [ADDR_W-1:0]              uc_waddr,
  input  vliw_t                          uc_wdata,
  // SI start / completion (CPU side)
  input  logic                           si_start,
  input  logic [ADDR_W-1:0]              si_first,
  input  logic [ADDR_W-1:0]              si_last,
  output logic                           busy,
  output logic                           done,
  output logic [DATA_W-1:0]              result,
  output logic                           trap,
  output trap_e                          trap_cause,
  output logic [UTRAP_W-1:0]             trap_value,
  output logic [ADDR_W-1:0]              trap_pc,
  // fabric side
  output vliw_t                          vliw,      // current VLIW
  output logic                           issue,     // VLIW executes this clock
  input  logic                           fab_stall,
  input  logic [NSLOTS-1:0]             fab_err,
  input  logic [NSLOTS-1:0][COND_W-1:0] fab_cond,
  input  logic [DATA_W-1:0]              fab_res   // fabric source vliw.res_src
);

  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e            state_q;
  logic [ADDR_W-1:0] pc_q, lo_q, hi_q;
  vliw_t             ir_q;
  logic [VLIW_W-1:0] mem [DEPTH];

  logic              run, take, stall_hit, last_done, bad_tgt, trap_now;
  logic [ADDR_W-1:0] dest, target, fetch_addr;
  logic [CNT_W-1:0]  cnt;
  trap_e             cause;

  assign run  = (state_q == S_RUN);
  assign vliw = ir_q;
  assign busy = run;

  dce_param_sets u_ps (
    .clk, .rst_n,
    .apply  (issue),
    .cmd    (ir_q.ps_cmd),
    .set    (ir_q.ps_set),
    .dest_in(ir_q.ps_dest),
    .cnt_in (ir_q.ps_cnt),
    .rd_set (ir_q.jmp_set),
    .rd_dest(dest),
    .rd_cnt (cnt)
  );

  dce_jump_unit #(.N_SLOTS(NSLOTS)) u_jmp (
    .jmp     (ir_q.jmp),
    .cnt,
    .val     (ir_q.jmp_val),
    .acc_sel (ir_q.acc_sel),
    .acc_cond(fab_cond),
    .take
  );

  dce_stall_monitor #(.LIMIT(STALL_LIM)) u_stall (
    .clk, .rst_n,
    .active   (run),
    .stall    (fab_stall),
    .limit_hit(stall_hit)
  );

  always_comb begin
    target    = take ? dest : pc_q + 1'b1;
    last_done = ir_q.last && !take;
    bad_tgt   = !last_done && ((target < lo_q) || (target > hi_q) ||
                               (!take && pc_q == hi_q));
    cause = TRAP_NONE;
    if (|fab_err)                         cause = TRAP_ACC_ERR;
    else if (stall_hit)                   cause = TRAP_STALL;
    else if (!fab_stall && ir_q.utrap != '0) cause = TRAP_USER;
    else if (!fab_stall && bad_tgt)       cause = TRAP_BAD_JUMP;
    trap_now = run && (cause != TRAP_NONE);
    issue    = run && !fab_stall && !trap_now;
    if (!run)       fetch_addr = si_first;
    else if (issue) fetch_addr = target;
    else            fetch_addr = pc_q;
  end

  // microcode memory: one write port, one synchronous read port
  always_ff @(posedge clk) begin
    if (uc_we) mem[uc_waddr] <= uc_wdata;
    ir_q <= vliw_t'(mem[fetch_addr]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      pc_q       <= '0;
      lo_q       <= '0;
      hi_q       <= '0;
      done       <= 1'b0;
      trap       <= 1'b0;
      result     <= '0;
      trap_cause <= TRAP_NONE;
      trap_value <= '0;
      trap_pc    <= '0;
    end else begin
      done <= 1'b0;
      trap <= 1'b0;
      pc_q <= fetch_addr;
      if (!run) begin
        if (si_start) begin
          state_q    <= S_RUN;
          lo_q       <= si_first;
          hi_q       <= si_last;
          trap_cause <= TRAP_NONE;
          trap_value <= '0;
        end
      end else begin
        if (issue && ir_q.res_wr) result <= fab_res;
        if (trap_now) begin
          state_q    <= S_IDLE;
          trap       <= 1'b1;
          trap_cause <= cause;
          trap_value <= ir_q.utrap;
          trap_pc    <= pc_q;
        end else if (issue && last_done) begin
          state_q <= S_IDLE;
          done    <= 1'b1;
        end
      end
    end
  end

  // a jump only lands inside the running SI
  property p_pc_in_si;
    @(posedge clk) disable iff (!rst_n) (run && issue && !last_done) |-> (target >= lo_q && target <= hi_q);
  endproperty
  a_pc_in_si: assert property (p_pc_in_si);

endmodule
