// mc_cp: Multi-Cycle CheckPoint.
//
// Saves the core state when a runahead starts and puts it back when it ends.
// The branch-prediction state (global history register and return address
// stack with its pointer) is small and is copied in a single cycle, on the
// cycle `save` is high, and handed back on the cycle `restore` is high
// (front_restore).  The 32 x 64-bit general-purpose registers are copied
// REGS_PER_CYCLE at a time over NREGS/REGS_PER_CYCLE cycles through
// dedicated read ports of the register file, and written back the same way
// through its restore ports; the paper's point is that this takes no more
// time than flushing and refilling the pipeline, at a fraction of the wiring
// of a single-cycle copy.  The copy order (register 0 upwards) and the
// number of registers per cycle are this design's choice.
//
// Timing: `save` (one cycle) starts the copy; in each of the next
// NREGS/REGS_PER_CYCLE cycles cp_rd_idx names the registers read and the
// last of these cycles raises save_done.  `restore` likewise starts the
// write-back; cp_wr_en is high for NREGS/REGS_PER_CYCLE cycles and
// restore_done on the last.  upd_valid overwrites one saved register (used
// when a normal miss, such as the stall-load, returns its data during
// runahead); it wins over a copy of the same register in the same cycle, and
// a restore of that register in that cycle writes the new value.
// wb_upd_* does the same for the pipeline write port while the save is
// running: instructions older than the stalled one still write back in the
// first cycles of the save, possibly to a register already copied.  The
// long-latency update wins over it; both win over the copy.
module mc_cp #(
  parameter int unsigned XLEN           = 64,
  parameter int unsigned NREGS          = 32,
  parameter int unsigned REGS_PER_CYCLE = 4,
  parameter int unsigned GHR_W          = 8,
  parameter int unsigned RAS_DEPTH      = 6,
  parameter int unsigned VADDR_W        = 40,
  localparam int unsigned IDX_W         = $clog2(NREGS),
  localparam int unsigned RAS_PW        = $clog2(RAS_DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     save,
  input  logic                     restore,
  output logic                     save_done,
  output logic                     restore_done,
  output logic                     busy,
  // register file checkpoint ports
  output logic [IDX_W-1:0]         cp_rd_idx  [REGS_PER_CYCLE],
  input  logic [XLEN-1:0]          cp_rd_data [REGS_PER_CYCLE],
  output logic                     cp_wr_en,
  output logic [IDX_W-1:0]         cp_wr_idx  [REGS_PER_CYCLE],
  output logic [XLEN-1:0]          cp_wr_data [REGS_PER_CYCLE],
  // late update of one saved register
  input  logic                     upd_valid,
  input  logic [IDX_W-1:0]         upd_idx,
  input  logic [XLEN-1:0]          upd_data,
  // pipeline write-back of an older instruction while the save is running
  input  logic                     wb_upd_valid,
  input  logic [IDX_W-1:0]         wb_upd_idx,
  input  logic [XLEN-1:0]          wb_upd_data,
  // front-end state, single-cycle checkpoint
  input  logic [GHR_W-1:0]         ghr_in,
  input  logic [VADDR_W-1:0]       ras_in     [RAS_DEPTH],
  input  logic [RAS_PW-1:0]        ras_ptr_in,
  output logic                     front_restore,
  output logic [GHR_W-1:0]         ghr_out,
  output logic [VADDR_W-1:0]       ras_out    [RAS_DEPTH],
  output logic [RAS_PW-1:0]        ras_ptr_out
);
  localparam int unsigned STEPS  = NREGS / REGS_PER_CYCLE;
  localparam int unsigned STEP_W = (STEPS > 1) ? $clog2(STEPS) : 1;

  typedef enum logic [1:0] {CP_IDLE, CP_SAVE, CP_RESTORE} cp_state_e;
  cp_state_e         st;
  logic [STEP_W-1:0] cnt;
  logic [XLEN-1:0]   saved [NREGS];

  initial begin
    assert (NREGS % REGS_PER_CYCLE == 0) else $error("NREGS must be a multiple of REGS_PER_CYCLE");
  end

  assign busy          = st != CP_IDLE;
  assign save_done     = st == CP_SAVE    && 32'(cnt) == STEPS - 1;
  assign restore_done  = st == CP_RESTORE && 32'(cnt) == STEPS - 1;
  assign cp_wr_en      = st == CP_RESTORE;
  assign front_restore = restore;

  always_comb begin
    for (int unsigned j = 0; j < REGS_PER_CYCLE; j++) begin
      cp_rd_idx[j]  = IDX_W'(32'(cnt) * REGS_PER_CYCLE + j);
      cp_wr_idx[j]  = cp_rd_idx[j];
      cp_wr_data[j] = (upd_valid && upd_idx == cp_rd_idx[j]) ? upd_data : saved[cp_rd_idx[j]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= CP_IDLE;
      cnt <= '0;
    end else begin
      unique case (st)
        CP_IDLE: begin
          cnt <= '0;
          if (save)         st <= CP_SAVE;
          else if (restore) st <= CP_RESTORE;
        end
        CP_SAVE, CP_RESTORE: begin
          cnt <= cnt + 1'b1;
          if (32'(cnt) == STEPS - 1) begin
            st  <= CP_IDLE;
            cnt <= '0;
          end
        end
        default: st <= CP_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (st == CP_SAVE)
      for (int unsigned j = 0; j < REGS_PER_CYCLE; j++) saved[cp_rd_idx[j]] <= cp_rd_data[j];
    if (wb_upd_valid && st == CP_SAVE) saved[wb_upd_idx] <= wb_upd_data;
    if (upd_valid) saved[upd_idx] <= upd_data;   // wins over a copy of the same register
  end

  // branch-prediction state: one-cycle copy
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ghr_out     <= '0;
      ras_ptr_out <= '0;
      for (int unsigned k = 0; k < RAS_DEPTH; k++) ras_out[k] <= '0;
    end else if (save && st == CP_IDLE) begin
      ghr_out     <= ghr_in;
      ras_ptr_out <= ras_ptr_in;
      for (int unsigned k = 0; k < RAS_DEPTH; k++) ras_out[k] <= ras_in[k];
    end
  end
endmodule
