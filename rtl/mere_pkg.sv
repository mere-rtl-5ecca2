// mere_pkg: types and constants shared by the runahead (MERE) hardware.
//
// The MERE additions sit beside a scalar five-stage in-order RISC-V core
// (RV64, 32 x 64-bit GPRs, 32-entry scoreboard).  This package holds the
// widths used across modules, the runahead FSM state encoding and the
// encoding of the five MERE instructions.  The FSM state names follow the
// paper; the numeric encodings and the instruction encoding are this
// design's own choice (the paper does not give them).
package mere_pkg;

  localparam int unsigned XLEN    = 64;   // GPR width (RV64)
  localparam int unsigned NREGS   = 32;   // architectural registers
  localparam int unsigned REG_W   = 5;    // register number width
  localparam int unsigned PADDR_W = 32;   // physical address width (assumed)
  localparam int unsigned VADDR_W = 40;   // PC / return-address width (assumed)
  localparam int unsigned TAG_W   = 7;    // miss tag width, tags 0x00..0x7F

  // Runahead control FSM states (names from the paper)
  typedef enum logic [2:0] {
    ST_PSEUDO_ENTRY  = 3'd0,   // normal execution, misses are traced
    ST_MERE_ENTER    = 3'd1,   // checkpoint being taken
    ST_MERE_EXECUTE  = 3'd2,   // runahead execution
    ST_MERE_EXEC_ERR = 3'd3,   // conflict, failed prefetch or too few MSHRs
    ST_MERE_PASS     = 3'd4,   // decide: retry, pseudo exit or normal exit
    ST_PSEUDO_EXIT   = 3'd5,   // drain and intercept runahead write-backs
    ST_NORMAL_EXIT   = 3'd6    // restore checkpoint, redirect to Stall_PC
  } rcu_state_e;

  // Miss command field of the trace table (Cmd = 01 printed for loads)
  typedef enum logic [1:0] {
    CMD_NONE  = 2'b00,
    CMD_LOAD  = 2'b01,
    CMD_STORE = 2'b10,
    CMD_PREF  = 2'b11
  } miss_cmd_e;

  // MERE instructions: custom-0 opcode, funct3 selects the operation
  localparam logic [6:0] MERE_OPCODE = 7'b0001011;
  typedef enum logic [2:0] {
    F3_CHECK_MODE    = 3'd0,   // m.check_mode    rd
    F3_CHECK_SKIP    = 3'd1,   // m.check_skip    rd
    F3_SKIP_PREFETCH = 3'd2,   // m.skip_prefetch rs1
    F3_SET_STEP      = 3'd3,   // m.set_step      rs1
    F3_CLEAR_STEP    = 3'd4    // m.clear_step    rs1
  } mere_f3_e;

  // One entry of the miss trace table
  typedef struct packed {
    logic               valid;
    logic               spec;      // issued during runahead (gain-load)
    logic               l2miss;    // the L2 also missed (L2 MSHR acquire seen)
    logic               indirect;  // judged indirect by the efficiency detector
    miss_cmd_e          cmd;
    logic [REG_W-1:0]   rd;
    logic [PADDR_W-1:0] addr;
  } trace_entry_t;

endpackage
