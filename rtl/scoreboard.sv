// scoreboard: the core's 32-entry load scoreboard with the MERE release
// circuit.
//
// One bit per register marks a load whose data has not returned; the ID
// stage stalls an instruction that reads a busy register.  The core sets a
// bit when a missing load issues (set_*) and clears it when the data is
// written back (clr_*).  MERE adds the release circuit: a release from the
// runahead control unit (a stall-load or gain-load during runahead) or from
// the prefetch management unit (a load it blocked) resets the bit of that
// register so the pipeline stops waiting on data that will not be used.
// Release and clear win over a set of the same register in the same cycle.
// Register x0 is never busy.  Reads are combinational.
module scoreboard #(
  parameter int unsigned NREGS  = 32,
  localparam int unsigned IDX_W = $clog2(NREGS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             set_en,
  input  logic [IDX_W-1:0] set_rd,
  input  logic             clr_en,
  input  logic [IDX_W-1:0] clr_rd,
  input  logic             rel_rcu_en,
  input  logic [IDX_W-1:0] rel_rcu_rd,
  input  logic             rel_pmu_en,
  input  logic [IDX_W-1:0] rel_pmu_rd,
  input  logic [IDX_W-1:0] rs1,
  input  logic [IDX_W-1:0] rs2,
  output logic             rs1_busy,
  output logic             rs2_busy,
  output logic [NREGS-1:0] busy
);
  logic [NREGS-1:0] reset_mask, set_mask;

  always_comb begin
    reset_mask = '0;
    set_mask   = '0;
    if (clr_en)     reset_mask[clr_rd]     = 1'b1;
    if (rel_rcu_en) reset_mask[rel_rcu_rd] = 1'b1;
    if (rel_pmu_en) reset_mask[rel_pmu_rd] = 1'b1;
    if (set_en)     set_mask[set_rd]       = 1'b1;
  end

  assign rs1_busy = busy[rs1];
  assign rs2_busy = busy[rs2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= '0;
    else        busy <= ((busy | set_mask) & ~reset_mask) & ~NREGS'(1);
  end
endmodule
