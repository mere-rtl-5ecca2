// tb_isu: directed runahead sequence through the Invalid-Set Unit: a
// stall-load register marked invalid, invalid propagation through an ALU
// op, a load with an invalid base blocked at MA (one cycle later) and
// released (two cycles later), invalid reset by a valid load and by an
// all-valid ALU op, a store with invalid data setting its address bit and a
// valid store clearing it, a load hitting that invalid entry, the skip kill,
// no effect outside runahead, and flush.
`include "tb_common.svh"
module tb_isu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0, flush = 0, set_valid = 0;
  logic [4:0] set_rd = 0;
  logic ex_valid = 0, ex_use_rs1 = 0, ex_use_rs2 = 0, ex_wen = 0, ex_load = 0, ex_store = 0, ex_kill = 0, ex_rc_match = 0;
  logic [4:0] ex_rs1 = 0, ex_rs2 = 0, ex_rd = 0;
  logic [3:0] ex_rc_entry = 0;
  logic [31:0] inv_reg;
  logic [15:0] inv_addr;
  logic ma_block, rel_valid;
  logic [4:0] rel_rd;
  always #5 clk = ~clk;
  isu dut (.*);

  typedef enum {ALU, LD, ST} op_e;
  task automatic issue(input op_e op, input int rs1, input int rs2, input int rd, input bit kill = 0,
                       input bit rcm = 0, input int ent = 0);
    @(negedge clk);
    ex_valid = 1; ex_load = (op == LD); ex_store = (op == ST); ex_kill = kill;
    ex_rs1 = 5'(rs1); ex_rs2 = 5'(rs2); ex_rd = 5'(rd);
    ex_use_rs1 = 1; ex_use_rs2 = (op != LD); ex_wen = (op != ST);
    ex_rc_match = rcm; ex_rc_entry = 4'(ent);
    @(negedge clk);
    ex_valid = 0; ex_load = 0; ex_store = 0; ex_kill = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // the stall-load is marked in the last checkpoint cycle, before run rises
    @(negedge clk); set_valid = 1; set_rd = 5'd5; @(negedge clk); set_valid = 0;
    `CHECK(inv_reg == 32'h20, "stall-load rd marked")
    // outside runahead EX instructions change nothing
    issue(ALU, 5, 1, 7);
    `CHECK(inv_reg == 32'h20, "no propagation outside runahead")
    run = 1;
    // (i) propagation: x6 = x5 + x1
    issue(ALU, 5, 1, 6);
    `CHECK(inv_reg[6], "propagated to x6")
    // load with invalid base x6 -> block at MA, release two cycles after EX
    @(negedge clk);
    ex_valid = 1; ex_load = 1; ex_rs1 = 5'd6; ex_use_rs1 = 1; ex_use_rs2 = 0; ex_rd = 5'd7; ex_wen = 1;
    @(posedge clk); #1;
    ex_valid = 0; ex_load = 0;
    `CHECK(ma_block && !rel_valid, "block one cycle after EX")
    @(posedge clk); #1;
    `CHECK(!ma_block && rel_valid && rel_rd == 5'd7, "release two cycles after EX")
    `CHECK(inv_reg[7], "blocked load rd invalid")
    // (ii) reset: valid load into x7, all-valid ALU into x6
    issue(LD, 2, 0, 7);
    `CHECK(!inv_reg[7], "valid load resets rd")
    issue(ALU, 1, 2, 6);
    `CHECK(!inv_reg[6], "valid ALU resets rd")
    // (iii) store with invalid data sets address bit, valid store clears it
    issue(ST, 1, 5, 0, 0, 1, 9);
    `CHECK(inv_addr[9], "store with invalid data sets address bit")
    issue(LD, 1, 0, 8, 0, 1, 9);
    `CHECK(inv_reg[8], "load from invalid entry invalidates rd")
    issue(ST, 1, 2, 0, 0, 1, 9);
    `CHECK(!inv_addr[9], "valid store clears address bit")
    // store with invalid base: blocked, no address change
    @(negedge clk);
    ex_valid = 1; ex_store = 1; ex_rs1 = 5'd5; ex_rs2 = 5'd1; ex_use_rs1 = 1; ex_use_rs2 = 1; ex_wen = 0; ex_rc_entry = 4'd3;
    @(posedge clk); #1; ex_valid = 0; ex_store = 0;
    `CHECK(ma_block && inv_addr == 0, "store with invalid base blocked")
    @(posedge clk); #1;
    `CHECK(!rel_valid, "store not released")
    // skip kill of a valid load
    issue(LD, 1, 0, 10, 1);
    `CHECK(inv_reg[10], "skipped load rd invalid")
    // x0 never invalid
    issue(ALU, 5, 0, 0);
    `CHECK(!inv_reg[0], "x0 stays valid")
    // EX update wins over set of the same register
    @(negedge clk);
    set_valid = 1; set_rd = 5'd12;
    ex_valid = 1; ex_load = 0; ex_store = 0; ex_rs1 = 5'd1; ex_rs2 = 5'd2; ex_use_rs1 = 1; ex_use_rs2 = 1; ex_rd = 5'd12; ex_wen = 1;
    @(negedge clk); set_valid = 0; ex_valid = 0;
    `CHECK(!inv_reg[12], "younger EX write wins")
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    `CHECK(inv_reg == 0 && inv_addr == 0, "flush clears invfiles")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
