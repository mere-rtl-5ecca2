// mere_top: the MERE runahead hardware of a scalar in-order core, wired
// together.
//
// MERE lets a five-stage in-order core keep executing past a load that
// missed in both cache levels: it checkpoints the registers, runs ahead to
// turn later loads into prefetches, and then restores the checkpoint and
// resumes at the stalled instruction.  This module holds every MERE block
// and the two core structures MERE changes:
//   rcu          runahead FSM, efficiency detector, miss trace, StepCounter
//   mc_cp        multi-cycle checkpoint of the GPRs, one-cycle GHR/RAS copy
//   gpr          register file with checkpoint ports and write-back intercept
//   scoreboard   load scoreboard with the release circuit
//   pmu          invalid-set unit, runahead cache and skip list
//   mini_decoder the five MERE instructions at the MA stage
// The rest of the core (fetch, decode, ALU/FPU/CSR, LSU), the L1 caches,
// the L2 and memory are not part of it; their signals are the ports below,
// grouped by pipeline stage.  The core is expected to stop issue while
// `hold` is high, flush and fetch from redirect_pc when redirect_valid is
// high, keep a load from memory when ma_block is high, take ma_rc_data when
// ma_rc_hit is high, write mere_wb_data for a MERE instruction, and reload
// GHR/RAS from ghr_out/ras_out when front_restore is high.
module mere_top
  import mere_pkg::*;
#(
  parameter int unsigned N_MSHR         = 8,
  parameter int unsigned REGS_PER_CYCLE = 4,
  parameter int unsigned GHR_W          = 8,
  parameter int unsigned RAS_DEPTH      = 6,
  parameter int unsigned STEP_W         = 5,
  localparam int unsigned IDLE_W        = $clog2(N_MSHR + 1),
  localparam int unsigned RAS_PW        = $clog2(RAS_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ---- ID stage ----
  input  logic [REG_W-1:0]      id_rs1,
  input  logic [REG_W-1:0]      id_rs2,
  output logic [XLEN-1:0]       id_rs1_data,
  output logic [XLEN-1:0]       id_rs2_data,
  output logic                  id_rs1_busy,
  output logic                  id_rs2_busy,
  input  logic                  hazard,        // ID stalled on a busy register
  input  logic [REG_W-1:0]      hazard_rs,
  input  logic [VADDR_W-1:0]    stall_pc,
  output logic                  hold,
  output logic                  redirect_valid,
  output logic [VADDR_W-1:0]    redirect_pc,
  // ---- EX stage ----
  input  logic                  ex_valid,
  input  logic [REG_W-1:0]      ex_rs1,
  input  logic                  ex_use_rs1,
  input  logic [REG_W-1:0]      ex_rs2,
  input  logic                  ex_use_rs2,
  input  logic [REG_W-1:0]      ex_rd,
  input  logic                  ex_wen,
  input  logic                  ex_load,
  input  logic                  ex_store,
  input  logic [PADDR_W-1:0]    ex_addr,
  input  logic [1:0]            ex_size,
  input  logic [XLEN-1:0]       ex_sdata,
  // ---- MA stage ----
  input  logic                  ma_valid,
  input  logic [31:0]           ma_inst,
  input  logic [XLEN-1:0]       ma_rs1_val,
  input  logic                  ma_load_issue,  // a load of this stage sets rd busy
  input  logic [REG_W-1:0]      ma_load_rd,
  output logic                  ma_block,
  output logic                  ma_rc_hit,
  output logic [63:0]           ma_rc_data,
  output logic                  ma_is_mere,
  output logic                  mere_wb_en,
  output logic [REG_W-1:0]      mere_wb_rd,
  output logic [XLEN-1:0]       mere_wb_data,
  // ---- WB stage (pipeline write port) ----
  input  logic                  wb_en,
  input  logic [REG_W-1:0]      wb_rd,
  input  logic [XLEN-1:0]       wb_data,
  // ---- D-cache MSHR miss message ----
  input  logic                  miss_valid,
  input  logic [TAG_W-1:0]      miss_tag,
  input  logic [PADDR_W-1:0]    miss_addr,
  input  miss_cmd_e             miss_cmd,
  input  logic [REG_W-1:0]      miss_rd,
  input  logic [IDLE_W-1:0]     mshr_idle,
  // ---- L2 MSHR acquire and memory response ----
  input  logic                  l2acq_valid,
  input  logic [TAG_W-1:0]      l2acq_tag,
  input  logic                  resp_valid,
  input  logic [TAG_W-1:0]      resp_tag,
  input  logic                  resp_wen,
  input  logic [REG_W-1:0]      resp_rd,
  input  logic [XLEN-1:0]       resp_data,
  // ---- front end (branch prediction state) ----
  input  logic [GHR_W-1:0]      ghr_in,
  input  logic [VADDR_W-1:0]    ras_in  [RAS_DEPTH],
  input  logic [RAS_PW-1:0]     ras_ptr_in,
  output logic                  front_restore,
  output logic [GHR_W-1:0]      ghr_out,
  output logic [VADDR_W-1:0]    ras_out [RAS_DEPTH],
  output logic [RAS_PW-1:0]     ras_ptr_out,
  // ---- status ----
  output logic                  runahead,
  output rcu_state_e            rcu_state,
  output logic                  intercept,
  output logic                  pmu_release,
  output logic                  rcu_release,
  output logic                  step_hit,
  output logic                  pseudo_exit,
  output logic                  ma_skipped,
  output logic [NREGS-1:0]      sb_busy,
  output logic [NREGS-1:0]      inv_reg
);
  // ---------------- wires ----------------
  logic               cp_save, cp_save_done, cp_restore, cp_restore_done, cp_busy;
  logic               rel_rcu_v, rel_pmu_v, inv_set_v, sb_set_v, flush, ckpt_upd, spec_run;
  logic [REG_W-1:0]   rel_rcu_rd, rel_pmu_rd, inv_set_rd, sb_set_rd, stall_rd;
  logic               set_step, clear_step, skip_v;
  logic [STEP_W-1:0]  step_val;
  logic [PADDR_W-1:0] skip_addr, last_pf;
  logic [REG_W-1:0]   cp_rd_idx  [REGS_PER_CYCLE];
  logic [XLEN-1:0]    cp_rd_data [REGS_PER_CYCLE];
  logic               cp_wr_en;
  logic [REG_W-1:0]   cp_wr_idx  [REGS_PER_CYCLE];
  logic [XLEN-1:0]    cp_wr_data [REGS_PER_CYCLE];

  // ---------------- runahead control unit ----------------
  rcu #(.N_MSHR(N_MSHR), .STEP_W(STEP_W)) u_rcu (
    .clk, .rst_n,
    .miss_valid, .miss_tag, .miss_addr, .miss_cmd, .miss_rd, .mshr_idle,
    .l2acq_valid, .l2acq_tag, .resp_valid, .resp_tag,
    .hazard, .hazard_rs, .stall_pc_in(stall_pc),
    .set_step, .clear_step, .step_val,
    .cp_save, .cp_save_done, .cp_restore, .cp_restore_done,
    .state         (rcu_state),
    .runahead,
    .spec_run,
    .pseudo_exit,
    .release_valid (rel_rcu_v),
    .release_rd    (rel_rcu_rd),
    .inv_set_valid (inv_set_v),
    .inv_set_rd,
    .intercept,
    .ckpt_upd,
    .stall_rd,
    .sb_set_valid  (sb_set_v),
    .sb_set_rd,
    .redirect_valid, .hold, .redirect_pc,
    .flush,
    .last_prefetch_addr(last_pf),
    .step_hit
  );

  // ---------------- multi-cycle checkpoint ----------------
  mc_cp #(.XLEN(XLEN), .NREGS(NREGS), .REGS_PER_CYCLE(REGS_PER_CYCLE),
          .GHR_W(GHR_W), .RAS_DEPTH(RAS_DEPTH), .VADDR_W(VADDR_W)) u_mccp (
    .clk, .rst_n,
    .save        (cp_save),
    .restore     (cp_restore),
    .save_done   (cp_save_done),
    .restore_done(cp_restore_done),
    .busy        (cp_busy),
    .cp_rd_idx, .cp_rd_data, .cp_wr_en, .cp_wr_idx, .cp_wr_data,
    .upd_valid   (ckpt_upd && resp_wen),
    .upd_idx     (resp_rd),
    .upd_data    (resp_data),
    .wb_upd_valid(wb_en),
    .wb_upd_idx  (wb_rd),
    .wb_upd_data (wb_data),
    .ghr_in, .ras_in, .ras_ptr_in,
    .front_restore, .ghr_out, .ras_out, .ras_ptr_out
  );

  // ---------------- register file ----------------
  gpr #(.XLEN(XLEN), .NREGS(NREGS), .REGS_PER_CYCLE(REGS_PER_CYCLE)) u_gpr (
    .clk,
    .rs1(id_rs1), .rs1_data(id_rs1_data),
    .rs2(id_rs2), .rs2_data(id_rs2_data),
    .wb_en, .wb_rd, .wb_data,
    .ll_en  (resp_valid && resp_wen),
    .ll_rd  (resp_rd),
    .ll_data(resp_data),
    .intercept,
    .cp_rd_idx, .cp_rd_data, .cp_wr_en, .cp_wr_idx, .cp_wr_data
  );

  // ---------------- scoreboard with release circuit ----------------
  scoreboard #(.NREGS(NREGS)) u_sb (
    .clk, .rst_n,
    .set_en    (ma_load_issue || sb_set_v),
    .set_rd    (ma_load_issue ? ma_load_rd : sb_set_rd),
    .clr_en    (resp_valid && resp_wen && !intercept),
    .clr_rd    (resp_rd),
    .rel_rcu_en(rel_rcu_v),
    .rel_rcu_rd,
    .rel_pmu_en(rel_pmu_v),
    .rel_pmu_rd,
    .rs1(id_rs1), .rs2(id_rs2),
    .rs1_busy(id_rs1_busy), .rs2_busy(id_rs2_busy),
    .busy(sb_busy)
  );

  // ---------------- prefetch management unit ----------------
  pmu #(.XLEN(XLEN), .NREGS(NREGS), .PADDR_W(PADDR_W)) u_pmu (
    .clk, .rst_n,
    .run       (spec_run),
    .flush,
    .set_valid (inv_set_v),
    .set_rd    (inv_set_rd),
    .ex_valid, .ex_rs1, .ex_use_rs1, .ex_rs2, .ex_use_rs2, .ex_rd, .ex_wen,
    .ex_load, .ex_store, .ex_addr, .ex_size, .ex_sdata,
    .skip_valid(skip_v),
    .skip_addr,
    .ma_block, .ma_rc_hit, .ma_rc_data, .ma_skipped,
    .rel_valid (rel_pmu_v),
    .rel_rd    (rel_pmu_rd),
    .inv_reg
  );

  // ---------------- mini decoder ----------------
  mini_decoder #(.XLEN(XLEN), .PADDR_W(PADDR_W), .STEP_W(STEP_W)) u_mini (
    .ma_valid, .ma_inst, .ma_rs1_val,
    .runahead,
    .last_prefetch_addr(last_pf),
    .is_mere   (ma_is_mere),
    .wb_en     (mere_wb_en),
    .wb_rd     (mere_wb_rd),
    .wb_data   (mere_wb_data),
    .set_step, .clear_step, .step_val,
    .skip_valid(skip_v),
    .skip_addr
  );

  assign pmu_release = rel_pmu_v;
  assign rcu_release = rel_rcu_v;
endmodule
