// rcu: Runahead Control Unit.
//
// The RCU decides when the core enters and leaves runahead and drives every
// other MERE block while it does.  It holds the efficiency detector, the
// miss trace table and the StepCounter, and a seven-state FSM whose states
// are the paper's:
//
//   Pseudo_Entry      normal execution; every D-cache miss message is traced.
//                     When the ID stage stalls on the register of a traced
//                     load that also missed in the L2 and that the detector
//                     called indirect, and more than two MSHRs are idle, the
//                     stall PC is latched and a checkpoint save is started
//                     (not if that load's data returns in the same cycle:
//                     this design's rule, the stall then ends by itself).
//   MERE_Enter        waits for the multi-cycle checkpoint; then releases the
//                     stall-load's register in the scoreboard and marks it
//                     invalid in the ISU.
//   MERE_Execute      runahead.  Each new load miss is a gain-load: it is
//                     traced as speculative, its rd is released and marked
//                     invalid, and it counts one step.  An address conflict,
//                     a response for an unknown tag or idle MSHR <= 2 goes to
//                     MERE_Execute_Error; stall-load data returning or the
//                     StepCounter limit goes to MERE_Pass.
//   MERE_Execute_Error one cycle, then MERE_Pass.
//   MERE_Pass         after an exit condition: Pseudo_Exit if gain-loads are
//                     still outstanding, else Normal_Exit.  After an error:
//                     back to MERE_Execute while retries < 3 and MSHRs allow,
//                     otherwise terminate through Normal_Exit.
//   Pseudo_Exit       DRAIN_CYC cycles for the runahead instructions still in
//                     the pipeline to finish.
//   Normal_Exit       restore the checkpoint, flush the runahead cache, ISU
//                     and skip list, re-mark the stall-load's register busy
//                     if its data is still out, and when the restore is done
//                     redirect fetch to Stall_PC.
//
// Instructions that issue from MERE_Execute until the end of Normal_Exit are
// runahead instructions (spec_run): their misses are traced as gain-loads and
// released, even while the pipeline drains in Pseudo_Exit.  In MERE_Enter the
// instructions older than the stalled one are still completing and are
// treated as normal.  Outside the running states (Execute, Execute_Error,
// Pass) a response to a speculative (gain-load) miss is intercepted: it may
// not write the GPR.  flush stays high through Normal_Exit, so that no store
// still in flight can refill the runahead cache after it was cleared.  A
// response to a normal (non-speculative) miss during runahead, the
// stall-load's among them, raises
// ckpt_upd so that the checkpoint copy of its register is updated and the
// restore does not bring back the stale value.  `hold` stops issue while the
// checkpoint is copied out or back; redirect_valid comes with the last
// restore cycle.  The FSM figure of the paper is not available, so the exact
// transitions, the drain length and the checkpoint update are this design's
// reading of the text.  All outputs are combinational on the state and the
// current inputs; state changes on the rising clock edge.  Some outputs of
// the trace table (stall address, response rd and address, Rptr/Wptr) and
// the StepCounter's count and limit are not needed by the FSM; they stay
// connected for observation in simulation and synthesis removes them.
module rcu
  import mere_pkg::REG_W, mere_pkg::rcu_state_e, mere_pkg::miss_cmd_e, mere_pkg::CMD_LOAD,
         mere_pkg::ST_PSEUDO_ENTRY, mere_pkg::ST_MERE_ENTER, mere_pkg::ST_MERE_EXECUTE,
         mere_pkg::ST_MERE_EXEC_ERR, mere_pkg::ST_MERE_PASS, mere_pkg::ST_PSEUDO_EXIT,
         mere_pkg::ST_NORMAL_EXIT;
#(
  parameter int unsigned TAG_W     = mere_pkg::TAG_W,
  parameter int unsigned PADDR_W   = mere_pkg::PADDR_W,
  parameter int unsigned VADDR_W   = mere_pkg::VADDR_W,
  parameter int unsigned N_MSHR    = 8,
  parameter int unsigned STEP_W    = 5,
  parameter int unsigned MAX_RETRY = 3,
  parameter int unsigned DRAIN_CYC = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // D-cache MSHR miss message
  input  logic                        miss_valid,
  input  logic [TAG_W-1:0]            miss_tag,
  input  logic [PADDR_W-1:0]          miss_addr,
  input  miss_cmd_e                   miss_cmd,
  input  logic [REG_W-1:0]            miss_rd,
  input  logic [$clog2(N_MSHR+1)-1:0] mshr_idle,
  // L2 MSHR acquire and memory response
  input  logic                        l2acq_valid,
  input  logic [TAG_W-1:0]            l2acq_tag,
  input  logic                        resp_valid,
  input  logic [TAG_W-1:0]            resp_tag,
  // ID-stage hazard: instruction waits on register hazard_rs
  input  logic                        hazard,
  input  logic [REG_W-1:0]            hazard_rs,
  input  logic [VADDR_W-1:0]          stall_pc_in,
  // StepCounter control from the mini decoder
  input  logic                        set_step,
  input  logic                        clear_step,
  input  logic [STEP_W-1:0]           step_val,
  // checkpoint handshake
  output logic                        cp_save,
  input  logic                        cp_save_done,
  output logic                        cp_restore,
  input  logic                        cp_restore_done,
  // control outputs
  output rcu_state_e                  state,
  output logic                        runahead,
  output logic                        spec_run,
  output logic                        pseudo_exit,
  output logic                        release_valid,
  output logic [REG_W-1:0]            release_rd,
  output logic                        inv_set_valid,
  output logic [REG_W-1:0]            inv_set_rd,
  output logic                        intercept,
  output logic                        ckpt_upd,
  output logic [REG_W-1:0]            stall_rd,
  output logic                        sb_set_valid,
  output logic [REG_W-1:0]            sb_set_rd,
  output logic                        redirect_valid,
  output logic                        hold,
  output logic [VADDR_W-1:0]          redirect_pc,
  output logic                        flush,
  output logic [PADDR_W-1:0]          last_prefetch_addr,
  output logic                        step_hit
);
  rcu_state_e state_n;

  // ---------------- efficiency detector ----------------
  logic ed_indirect, ed_enough;
  efficiency_detector #(.PADDR_W(PADDR_W), .N_MSHR(N_MSHR)) u_ed (
    .clk, .rst_n,
    .miss_valid (miss_valid && miss_cmd == CMD_LOAD),
    .miss_addr, .mshr_idle,
    .indirect   (ed_indirect),
    .enough_mshr(ed_enough)
  );

  // ---------------- miss trace table ----------------
  logic               in_run;          // gain-load tracing active
  logic               tr_stall_found, tr_stall_l2, tr_stall_ind;
  logic [TAG_W-1:0]   tr_stall_tag;
  logic [PADDR_W-1:0] tr_stall_addr;
  logic               tr_conflict, tr_fail, tr_resp_live, tr_resp_spec;
  logic [REG_W-1:0]   tr_resp_rd;
  logic [PADDR_W-1:0] tr_resp_addr;
  logic [TAG_W:0]     tr_spec_cnt, tr_rptr, tr_wptr;

  miss_tracker #(.TAG_W(TAG_W), .PADDR_W(PADDR_W)) u_trace (
    .clk, .rst_n,
    .alloc_valid   (miss_valid),
    .alloc_tag     (miss_tag),
    .alloc_addr    (miss_addr),
    .alloc_cmd     (miss_cmd),
    .alloc_rd      (miss_rd),
    .alloc_spec    (spec_run),
    .alloc_indirect(ed_indirect),
    .l2acq_valid, .l2acq_tag,
    .resp_valid, .resp_tag,
    .find_rd       (hazard_rs),
    .stall_found   (tr_stall_found),
    .stall_tag     (tr_stall_tag),
    .stall_l2miss  (tr_stall_l2),
    .stall_indirect(tr_stall_ind),
    .stall_addr    (tr_stall_addr),
    .conflict      (tr_conflict),
    .fail          (tr_fail),
    .resp_live     (tr_resp_live),
    .resp_spec     (tr_resp_spec),
    .resp_rd       (tr_resp_rd),
    .resp_addr     (tr_resp_addr),
    .spec_cnt      (tr_spec_cnt),
    .rptr          (tr_rptr),
    .wptr          (tr_wptr)
  );

  // ---------------- step counter ----------------
  logic [STEP_W-1:0] step_count, step_limit;
  step_counter #(.STEP_W(STEP_W)) u_step (
    .clk, .rst_n,
    .set_step, .clear_step, .step_val,
    .run   (in_run),
    .step  (in_run && miss_valid),
    .count (step_count),
    .limit (step_limit),
    .hit   (step_hit)
  );

  // ---------------- FSM ----------------
  logic [TAG_W-1:0]   stall_tag_q;
  logic [REG_W-1:0]   stall_rd_q;
  logic [VADDR_W-1:0] stall_pc_q;
  logic               stall_done_q;   // stall-load data has returned
  logic               exit_req_q;     // MERE_Pass reached by an exit condition
  logic [1:0]         retry_q;
  logic [3:0]         drain_q;

  logic enter_ok, stall_back, exec_err, exit_now;

  // a stall load whose data is returning in this very cycle ends the stall by
  // itself; entering for it would wait for a response that has already gone
  assign enter_ok   = hazard && tr_stall_found && tr_stall_l2 && tr_stall_ind && ed_enough &&
                      !(tr_resp_live && resp_tag == tr_stall_tag);
  assign stall_back = tr_resp_live && resp_tag == stall_tag_q && !tr_resp_spec;
  assign in_run     = state inside {ST_MERE_EXECUTE, ST_MERE_EXEC_ERR, ST_MERE_PASS};
  assign exec_err   = tr_conflict || tr_fail || !ed_enough;
  assign exit_now   = stall_back || stall_done_q || step_hit;

  always_comb begin
    state_n = state;
    unique case (state)
      ST_PSEUDO_ENTRY:  if (enter_ok) state_n = ST_MERE_ENTER;
      ST_MERE_ENTER:    if (cp_save_done) state_n = ST_MERE_EXECUTE;
      ST_MERE_EXECUTE:  if (exit_now)      state_n = ST_MERE_PASS;
                        else if (exec_err) state_n = ST_MERE_EXEC_ERR;
      ST_MERE_EXEC_ERR: state_n = ST_MERE_PASS;
      ST_MERE_PASS: begin
        if (exit_req_q || exit_now)
          state_n = (tr_spec_cnt != '0) ? ST_PSEUDO_EXIT : ST_NORMAL_EXIT;
        else if (32'(retry_q) < MAX_RETRY && ed_enough)
          state_n = ST_MERE_EXECUTE;
        else
          state_n = ST_NORMAL_EXIT;
      end
      ST_PSEUDO_EXIT:   if (32'(drain_q) + 1 >= DRAIN_CYC) state_n = ST_NORMAL_EXIT;
      ST_NORMAL_EXIT:   if (cp_restore_done) state_n = ST_PSEUDO_ENTRY;
      default:          state_n = ST_PSEUDO_ENTRY;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state              <= ST_PSEUDO_ENTRY;
      stall_tag_q        <= '0;
      stall_rd_q         <= '0;
      stall_pc_q         <= '0;
      stall_done_q       <= 1'b0;
      exit_req_q         <= 1'b0;
      retry_q            <= '0;
      drain_q            <= '0;
      last_prefetch_addr <= '0;
    end else begin
      state <= state_n;
      if (state == ST_PSEUDO_ENTRY && enter_ok) begin
        stall_tag_q  <= tr_stall_tag;
        stall_rd_q   <= hazard_rs;
        stall_pc_q   <= stall_pc_in;
        stall_done_q <= 1'b0;
        exit_req_q   <= 1'b0;
        retry_q      <= '0;
      end else if (state != ST_PSEUDO_ENTRY && stall_back) begin
        stall_done_q <= 1'b1;
      end
      if (state == ST_MERE_EXECUTE && state_n == ST_MERE_PASS) exit_req_q <= 1'b1;
      if (state == ST_MERE_PASS && state_n == ST_MERE_EXECUTE) retry_q <= retry_q + 2'd1;
      drain_q <= (state == ST_PSEUDO_EXIT) ? drain_q + 4'd1 : '0;
      if (in_run && miss_valid) last_prefetch_addr <= miss_addr;
    end
  end

  // ---------------- outputs ----------------
  assign runahead    = state != ST_PSEUDO_ENTRY;
  // instructions issued from MERE_Execute on are runahead instructions, up to
  // the end of the restore; in MERE_Enter the pipeline still drains older,
  // real instructions
  assign spec_run    = !(state inside {ST_PSEUDO_ENTRY, ST_MERE_ENTER});
  assign pseudo_exit = state == ST_PSEUDO_EXIT;
  assign cp_save     = state == ST_PSEUDO_ENTRY && enter_ok;
  // restore and redirect are issued on the first cycle of Normal_Exit
  logic exit_first;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) exit_first <= 1'b0;
    else        exit_first <= state != ST_NORMAL_EXIT && state_n == ST_NORMAL_EXIT;
  end
  assign cp_restore     = exit_first;
  assign flush          = state == ST_NORMAL_EXIT;
  assign redirect_valid = state == ST_NORMAL_EXIT && cp_restore_done;
  assign hold           = state inside {ST_MERE_ENTER, ST_NORMAL_EXIT};
  assign redirect_pc    = stall_pc_q;
  assign sb_set_valid   = exit_first && !stall_done_q && !stall_back;
  assign sb_set_rd      = stall_rd_q;

  // release / invalidate: the stall-load when runahead starts, each gain-load miss
  logic enter_release, gain_load;
  assign enter_release = state == ST_MERE_ENTER && cp_save_done;
  assign gain_load     = spec_run && miss_valid && miss_cmd == CMD_LOAD;
  always_comb begin
    release_valid = enter_release || gain_load;
    release_rd    = enter_release ? stall_rd_q : miss_rd;
  end
  assign inv_set_valid = release_valid;
  assign inv_set_rd    = release_rd;

  assign intercept  = tr_resp_spec && !in_run;
  // a non-speculative response during runahead also updates the checkpoint
  assign ckpt_upd   = state != ST_PSEUDO_ENTRY && tr_resp_live && !tr_resp_spec;
  assign stall_rd   = stall_rd_q;
endmodule
