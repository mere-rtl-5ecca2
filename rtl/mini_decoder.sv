// mini_decoder: Mini-Decoder for the MERE instructions at the MA stage.
//
// Separates the five MERE instructions from ordinary RISC-V instructions
// and carries them out:
//   m.check_mode    rd  : rd <- 1 while the core is in runahead, else 0
//   m.check_skip    rd  : rd <- address of the latest runahead prefetch, for
//                         the software to compare with its conflict list
//   m.skip_prefetch rs1 : put rs1 (an address) on the PMU skip list
//   m.set_step      rs1 : StepCounter limit <- rs1
//   m.clear_step    rs1 : StepCounter count <- rs1, limit cleared
// The paper names the instructions but not their encoding; this design uses
// the RISC-V custom-0 opcode (0001011) in R-type form with funct3 0..4 in the
// order above.  The outputs are combinational on the MA-stage instruction;
// the rd result goes to write-back with the instruction.
module mini_decoder
  import mere_pkg::MERE_OPCODE, mere_pkg::mere_f3_e, mere_pkg::F3_CHECK_MODE,
         mere_pkg::F3_CHECK_SKIP, mere_pkg::F3_SKIP_PREFETCH, mere_pkg::F3_SET_STEP,
         mere_pkg::F3_CLEAR_STEP;
#(
  parameter int unsigned XLEN    = 64,
  parameter int unsigned PADDR_W = 32,
  parameter int unsigned STEP_W  = 5
) (
  input  logic               ma_valid,
  input  logic [31:0]        ma_inst,
  input  logic [XLEN-1:0]    ma_rs1_val,
  input  logic               runahead,
  input  logic [PADDR_W-1:0] last_prefetch_addr,
  output logic               is_mere,
  output logic               wb_en,
  output logic [4:0]         wb_rd,
  output logic [XLEN-1:0]    wb_data,
  output logic               set_step,
  output logic               clear_step,
  output logic [STEP_W-1:0]  step_val,
  output logic               skip_valid,
  output logic [PADDR_W-1:0] skip_addr
);
  logic [2:0] f3;
  assign f3 = ma_inst[14:12];

  always_comb begin
    is_mere    = ma_valid && ma_inst[6:0] == MERE_OPCODE && f3 <= 3'd4;
    wb_en      = 1'b0;
    wb_rd      = ma_inst[11:7];
    wb_data    = '0;
    set_step   = 1'b0;
    clear_step = 1'b0;
    skip_valid = 1'b0;
    step_val   = ma_rs1_val[STEP_W-1:0];
    skip_addr  = ma_rs1_val[PADDR_W-1:0];
    if (is_mere) begin
      unique case (mere_f3_e'(f3))
        F3_CHECK_MODE:    begin wb_en = 1'b1; wb_data = XLEN'(runahead); end
        F3_CHECK_SKIP:    begin wb_en = 1'b1; wb_data = XLEN'(last_prefetch_addr); end
        F3_SKIP_PREFETCH: skip_valid = 1'b1;
        F3_SET_STEP:      set_step   = 1'b1;
        F3_CLEAR_STEP:    clear_step = 1'b1;
        default: ;
      endcase
    end
  end
endmodule
