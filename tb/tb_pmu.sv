// tb_pmu: runahead traffic through the prefetch management unit: stores
// kept in the runahead cache and blocked from the D-cache, a later load
// served from the runahead cache at MA, a load with an invalid base blocked
// and released, a load to a block on the skip list blocked and released,
// nothing blocked or served outside runahead, and flush.
`include "tb_common.svh"
module tb_pmu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, run = 0, flush = 0, set_valid = 0;
  logic [4:0] set_rd = 0, ex_rs1 = 0, ex_rs2 = 0, ex_rd = 0;
  logic ex_valid = 0, ex_use_rs1 = 0, ex_use_rs2 = 0, ex_wen = 0, ex_load = 0, ex_store = 0;
  logic [31:0] ex_addr = 0, skip_addr = 0;
  logic [1:0] ex_size = 0;
  logic [63:0] ex_sdata = 0, ma_rc_data;
  logic skip_valid = 0, ma_block, ma_rc_hit, ma_skipped, rel_valid;
  logic [4:0] rel_rd;
  logic [31:0] inv_reg;
  always #5 clk = ~clk;
  pmu dut (.*);

  // issue one instruction in EX, return MA-stage view one cycle later
  task automatic ex(input bit ld, input bit st, input int rs1, input int rd, input logic [31:0] a,
                    input int sz = 3, input logic [63:0] sd = 0);
    @(negedge clk);
    ex_valid = 1; ex_load = ld; ex_store = st; ex_rs1 = 5'(rs1); ex_use_rs1 = 1;
    ex_rs2 = 5'd2; ex_use_rs2 = st; ex_rd = 5'(rd); ex_wen = ld; ex_addr = a; ex_size = 2'(sz); ex_sdata = sd;
    @(posedge clk); #1;
    ex_valid = 0; ex_load = 0; ex_store = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // outside runahead: store and load pass untouched
    ex(0, 1, 1, 0, 32'h100);
    `CHECK(!ma_block, "normal store not blocked")
    ex(1, 0, 1, 4, 32'h100);
    `CHECK(!ma_rc_hit && !ma_block, "normal load untouched")
    run = 1;
    // runahead store: written to R$, blocked from D$
    ex(0, 1, 1, 0, 32'h2468, 3, 64'h0123_4567_89AB_CDEF);
    `CHECK(ma_block && !ma_rc_hit, "runahead store blocked from D-cache")
    ex(1, 0, 1, 4, 32'h246C, 2);
    `CHECK(ma_rc_hit && ma_rc_data[31:0] == 32'h0123_4567 && !ma_block, "runahead load hits R$")
    // invalid base register: block + release
    @(negedge clk); set_valid = 1; set_rd = 5'd9; @(negedge clk); set_valid = 0;
    `CHECK(inv_reg[9], "x9 invalid")
    ex(1, 0, 9, 11, 32'h8000);
    `CHECK(ma_block && !ma_rc_hit, "load with invalid base blocked")
    @(posedge clk); #1;
    `CHECK(rel_valid && rel_rd == 5'd11, "blocked load released")
    // skip list
    @(negedge clk); skip_valid = 1; skip_addr = 32'h0000_9A40; @(negedge clk); skip_valid = 0;
    ex(1, 0, 1, 12, 32'h0000_9A44, 2);
    `CHECK(ma_block && ma_skipped, "skipped prefetch blocked")
    @(posedge clk); #1;
    `CHECK(rel_valid && rel_rd == 5'd12 && inv_reg[12], "skipped load released and invalid")
    ex(1, 0, 1, 13, 32'h0000_9A48, 2);
    `CHECK(!ma_block && !ma_skipped, "next block not skipped")
    // flush at end of runahead
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    ex(1, 0, 1, 4, 32'h246C, 2);
    `CHECK(!ma_rc_hit && inv_reg == 0, "flush clears R$ and invfile")
    ex(1, 0, 1, 12, 32'h0000_9A44, 2);
    `CHECK(!ma_block, "flush clears skip list")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
