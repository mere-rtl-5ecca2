// isu: Invalid-Set Unit of the prefetch management unit.
//
// During runahead some values are unknown: the destination of a stall-load
// or of a gain-load (a load that missed during runahead) has no data.  The
// ISU tracks them like a scoreboard does, with a GPR invfile (one bit per
// register) and an ADDR invfile (one bit per runahead-cache entry), and
// keeps unknown values from turning into prefetches.
//
// Sources: set_valid/set_rd from the runahead control unit marks a register
// invalid.  Each EX-stage instruction is then checked against the invfiles:
//  (i)   a source register that is invalid makes its rd invalid (propagation);
//        a load or store whose base register is invalid, or a load the skip
//        list names (ex_kill), is blocked and a load's rd is released;
//  (ii)  a load with a valid address, or any other instruction whose sources
//        are all valid, clears the invalid bit of its rd (reset); a load that
//        matches an invalid runahead-cache entry instead makes its rd invalid;
//  (iii) a store with a valid address clears the address bit of the R$ entry
//        it writes, or sets it if its data register is invalid.
// An EX-stage update of a register wins over set_valid in the same cycle
// because the EX instruction is the younger one.  x0 is never invalid.
// Block reaches the MA stage one cycle later (one Pipeline_op register);
// release leaves after a second register, as the PMU figure prints two.
// EX-stage checks act only in runahead (run); set_valid is taken whenever
// the control unit raises it, which it does for the stall-load in the last
// checkpoint cycle, just before the runahead instructions start.  `flush`
// clears both invfiles.
module isu #(
  parameter int unsigned NREGS      = 32,
  parameter int unsigned RC_ENTRIES = 16,
  localparam int unsigned IDX_W     = $clog2(NREGS),
  localparam int unsigned ENT_W     = $clog2(RC_ENTRIES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  run,
  input  logic                  flush,
  input  logic                  set_valid,
  input  logic [IDX_W-1:0]      set_rd,
  // EX stage
  input  logic                  ex_valid,
  input  logic [IDX_W-1:0]      ex_rs1,
  input  logic                  ex_use_rs1,
  input  logic [IDX_W-1:0]      ex_rs2,
  input  logic                  ex_use_rs2,
  input  logic [IDX_W-1:0]      ex_rd,
  input  logic                  ex_wen,
  input  logic                  ex_load,
  input  logic                  ex_store,
  input  logic                  ex_kill,       // skip-list match of a load
  input  logic                  ex_rc_match,   // request address matches an R$ entry
  input  logic [ENT_W-1:0]      ex_rc_entry,
  // state
  output logic [NREGS-1:0]      inv_reg,
  output logic [RC_ENTRIES-1:0] inv_addr,
  // MA stage
  output logic                  ma_block,
  output logic                  rel_valid,
  output logic [IDX_W-1:0]      rel_rd
);
  logic act, rs1_inv, rs2_inv, base_inv, rd_inv, rd_ok, blk, rel;
  logic addr_set, addr_clr;

  assign act     = run && ex_valid;
  assign rs1_inv = ex_use_rs1 && inv_reg[ex_rs1];
  assign rs2_inv = ex_use_rs2 && inv_reg[ex_rs2];
  assign base_inv = rs1_inv;   // memory ops take their address from rs1

  always_comb begin
    rd_inv   = 1'b0;
    rd_ok    = 1'b0;
    blk      = 1'b0;
    rel      = 1'b0;
    addr_set = 1'b0;
    addr_clr = 1'b0;
    if (act) begin
      if (ex_load) begin
        if (base_inv || ex_kill) begin
          rd_inv = ex_wen; blk = 1'b1; rel = ex_wen;
        end else if (ex_rc_match && inv_addr[ex_rc_entry]) begin
          rd_inv = ex_wen;
        end else begin
          rd_ok  = ex_wen;
        end
      end else if (ex_store) begin
        if (base_inv)     blk      = 1'b1;
        else if (rs2_inv) addr_set = 1'b1;
        else              addr_clr = 1'b1;
      end else if (ex_wen) begin
        if (rs1_inv || rs2_inv) rd_inv = 1'b1;
        else                    rd_ok  = 1'b1;
      end
    end
  end

  logic             rel_q;
  logic [IDX_W-1:0] rel_rd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      inv_reg   <= '0;
      inv_addr  <= '0;
      ma_block  <= 1'b0;
      rel_q     <= 1'b0;
      rel_rd_q  <= '0;
      rel_valid <= 1'b0;
      rel_rd    <= '0;
    end else begin
      ma_block  <= blk;
      rel_q     <= rel && ex_rd != '0;
      rel_rd_q  <= ex_rd;
      rel_valid <= rel_q;
      rel_rd    <= rel_rd_q;
      if (flush) begin
        inv_reg  <= '0;
        inv_addr <= '0;
      end else begin
        if (set_valid && set_rd != '0) inv_reg[set_rd] <= 1'b1;
        if (rd_inv && ex_rd != '0) inv_reg[ex_rd] <= 1'b1;
        if (rd_ok)                 inv_reg[ex_rd] <= 1'b0;
        if (addr_set)              inv_addr[ex_rc_entry] <= 1'b1;
        if (addr_clr)              inv_addr[ex_rc_entry] <= 1'b0;
        inv_reg[0] <= 1'b0;
      end
    end
  end
endmodule
