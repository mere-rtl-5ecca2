// tb_mere_top: end-to-end test of the MERE hardware at its default sizes.
// The testbench plays the in-order core and the memory side at the port
// level and runs three runaheads:
//  A. An indirect load misses in L1 and L2 and its consumer stalls.  MERE
//     checkpoints the registers (8 cycles, issue held), releases the stalled
//     register and runs ahead: m.check_mode reads 1, an invalid value
//     propagates through an ALU op, a load on it is blocked and released, a
//     runahead store lands in the runahead cache and a later load hits it,
//     m.skip_prefetch makes a load be skipped, a gain-load misses and is
//     released, m.check_skip returns its address, runahead results overwrite
//     registers.  The stall-load's data returns (exit), the gain-load is
//     still out (Pseudo_Exit), the checkpoint is restored, fetch is
//     redirected to the stall PC, GHR/RAS are handed back, and the late
//     gain-load response is intercepted.  All registers must hold their
//     pre-runahead values except the stall-load's destination, which holds
//     the returned data.
//  B. The StepCounter ends a runahead after one prefetch before the stall
//     data is back; the stall register is busy again after the exit and is
//     freed by its real response.
//  C. MSHRs run short during runahead: Execute_Error, termination.
// Each mechanism is counted at the ports; one that never happens is a
// failure.
`include "tb_common.svh"
module tb_mere_top;
  import mere_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [4:0] id_rs1 = 0, id_rs2 = 0, hazard_rs = 0;
  logic [63:0] id_rs1_data, id_rs2_data;
  logic id_rs1_busy, id_rs2_busy, hazard = 0, hold, redirect_valid;
  logic [39:0] stall_pc = 0, redirect_pc;
  logic ex_valid = 0, ex_use_rs1 = 0, ex_use_rs2 = 0, ex_wen = 0, ex_load = 0, ex_store = 0;
  logic [4:0] ex_rs1 = 0, ex_rs2 = 0, ex_rd = 0;
  logic [31:0] ex_addr = 0;
  logic [1:0] ex_size = 0;
  logic [63:0] ex_sdata = 0;
  logic ma_valid = 0, ma_load_issue = 0;
  logic [31:0] ma_inst = 0;
  logic [63:0] ma_rs1_val = 0;
  logic [4:0] ma_load_rd = 0;
  logic ma_block, ma_rc_hit, ma_is_mere, mere_wb_en;
  logic [63:0] ma_rc_data, mere_wb_data;
  logic [4:0] mere_wb_rd;
  logic wb_en = 0;
  logic [4:0] wb_rd = 0;
  logic [63:0] wb_data = 0;
  logic miss_valid = 0;
  logic [6:0] miss_tag = 0, l2acq_tag = 0, resp_tag = 0;
  logic [31:0] miss_addr = 0;
  miss_cmd_e miss_cmd = CMD_LOAD;
  logic [4:0] miss_rd = 0, resp_rd = 0;
  logic [3:0] mshr_idle = 4'd8;
  logic l2acq_valid = 0, resp_valid = 0, resp_wen = 0;
  logic [63:0] resp_data = 0;
  logic [7:0] ghr_in = 8'h5A, ghr_out;
  logic [39:0] ras_in [6], ras_out [6];
  logic [2:0] ras_ptr_in = 3'd3, ras_ptr_out;
  logic front_restore, runahead, intercept, pmu_release, rcu_release, step_hit, pseudo_exit, ma_skipped;
  rcu_state_e rcu_state;
  logic [31:0] sb_busy, inv_reg;
  always #5 clk = ~clk;

  mere_top dut (.*);

  // ---------------- mechanism counters ----------------
  int n_enter, n_release_rcu, n_release_pmu, n_block, n_rc_hit, n_skip, n_intercept, n_pexit,
      n_restore, n_redirect, n_front, n_step_exit, n_stall_exit, n_error, n_mere, n_prop, n_hold;
  rcu_state_e prev_state = ST_PSEUDO_ENTRY;
  always @(posedge clk) if (rst_n) begin
    if (prev_state == ST_PSEUDO_ENTRY && rcu_state == ST_MERE_ENTER) n_enter++;
    if (prev_state != ST_PSEUDO_EXIT && rcu_state == ST_PSEUDO_EXIT) n_pexit++;
    if (prev_state == ST_MERE_EXECUTE && rcu_state == ST_MERE_EXEC_ERR) n_error++;
    prev_state <= rcu_state;
    n_release_rcu += int'(rcu_release);
    n_release_pmu += int'(pmu_release);
    n_block       += int'(ma_block);
    n_rc_hit      += int'(ma_rc_hit);
    n_skip        += int'(ma_skipped);
    n_intercept   += int'(intercept);
    n_redirect    += int'(redirect_valid);
    n_front       += int'(front_restore);
    n_mere        += int'(ma_is_mere);
    n_hold        += int'(hold);
    if (prev_state == ST_MERE_EXECUTE && rcu_state == ST_MERE_PASS && step_hit) n_step_exit++;
  end

  // ---------------- core-side helpers ----------------
  task automatic cyc(input int n = 1); repeat (n) @(negedge clk); endtask
  task automatic wreg(input int r, input logic [63:0] v);
    wb_en = 1; wb_rd = 5'(r); wb_data = v; cyc(); wb_en = 0;
  endtask
  logic [63:0] rv;
  task automatic rreg(input int r);
    id_rs2 = 5'(r); #1; rv = id_rs2_data;
  endtask
  task automatic missmsg(input int tag, input int rd, input logic [31:0] a, input bit l2 = 1);
    miss_valid = 1; miss_tag = 7'(tag); miss_rd = 5'(rd); miss_addr = a; miss_cmd = CMD_LOAD; cyc();
    miss_valid = 0;
    if (l2) begin l2acq_valid = 1; l2acq_tag = 7'(tag); cyc(); l2acq_valid = 0; end
  endtask
  task automatic respond(input int tag, input int rd, input logic [63:0] d);
    resp_valid = 1; resp_wen = 1; resp_tag = 7'(tag); resp_rd = 5'(rd); resp_data = d; #1;
    if (intercept) $display("  response tag %0d intercepted", tag);
    cyc(); resp_valid = 0; resp_wen = 0;
  endtask
  task automatic mere_inst(input logic [2:0] f3, input int rd, input logic [63:0] rs1v, output logic [63:0] res);
    ma_valid = 1; ma_inst = {12'd0, 5'd1, f3, 5'(rd), 7'b0001011}; ma_rs1_val = rs1v; #1;
    res = mere_wb_data;
    if (mere_wb_en) begin wb_en = 1; wb_rd = mere_wb_rd; wb_data = mere_wb_data; end
    cyc(); ma_valid = 0; wb_en = 0;
  endtask
  task automatic ex_op(input bit ld, input bit st, input int rs1, input int rs2, input int rd,
                       input logic [31:0] a = 0, input logic [63:0] sd = 0);
    ex_valid = 1; ex_load = ld; ex_store = st; ex_rs1 = 5'(rs1); ex_rs2 = 5'(rs2); ex_rd = 5'(rd);
    ex_use_rs1 = 1; ex_use_rs2 = !ld; ex_wen = !st; ex_addr = a; ex_size = 2'd3; ex_sdata = sd;
    cyc(); ex_valid = 0; ex_load = 0; ex_store = 0;
  endtask
  task automatic wait_for(input rcu_state_e s);
    int k = 0;
    while (rcu_state != s && k < 500) begin cyc(); k++; end
  endtask
  // wb_reg: an older instruction writes this register back in the second
  // cycle of the checkpoint save (0: none)
  task automatic stall_on(input int rd, input logic [39:0] pc, input int wb_reg = 0,
                          input logic [63:0] wb_val = 0);
    int k = 0;
    id_rs1 = 5'(rd); #1;
    `CHECK(id_rs1_busy, $sformatf("x%0d busy before runahead", rd))
    hazard = 1; hazard_rs = 5'(rd); stall_pc = pc;
    while (rcu_state != ST_MERE_EXECUTE && k < 100) begin
      if (k == 2 && wb_reg != 0) begin wb_en = 1; wb_rd = 5'(wb_reg); wb_data = wb_val; end
      cyc(); k++; wb_en = 0;
    end
    hazard = 0;
    `CHECK(k == 9, $sformatf("entry took %0d cycles", k))
    id_rs1 = 5'(rd); #1;
    `CHECK(!id_rs1_busy, "stall register released")
  endtask

  logic [63:0] golden [32];
  logic [63:0] res;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < 6; k++) ras_in[k] = 40'h10_0000_0000 + 40'(k * 4);
    cyc(2); rst_n = 1; cyc();
    for (int r = 1; r < 32; r++) begin golden[r] = 64'h1000_0000_0000_0000 + 64'(r * 8); wreg(r, golden[r]); end
    golden[0] = 0;
    // ================= A =================
    ma_load_issue = 1; ma_load_rd = 5'd10; cyc(); ma_load_issue = 0;
    missmsg(5, 10, 32'h0001_2340);
    stall_on(10, 40'h80_0000_1000, 2, 64'h0000_0000_0000_0A02);   // x2 copied in cycle 1
    golden[2] = 64'h0000_0000_0000_0A02;
    `CHECK(n_hold == 8, $sformatf("issue held while checkpointing (%0d)", n_hold))
    mere_inst(3'd0, 20, 0, res);
    `CHECK(res == 1, "m.check_mode = 1 in runahead")
    mere_inst(3'd2, 0, 64'h0000_9A40, res);                  // skip this block
    ex_op(0, 0, 10, 1, 12);                                   // x12 = x10 + x1  (x10 invalid)
    `CHECK(inv_reg[12], "invalid propagated to x12")
    ex_op(1, 0, 12, 0, 15, 32'h0000_4000);                    // load via x12: blocked
    `CHECK(ma_block, "load on invalid address blocked")
    cyc(2);
    ex_op(0, 1, 1, 2, 0, 32'h0000_2468, 64'hFEED_FACE_0BAD_F00D);  // runahead store
    `CHECK(ma_block, "runahead store kept from D-cache")
    ex_op(1, 0, 1, 0, 16, 32'h0000_2468);                     // load the stored value
    `CHECK(ma_rc_hit && ma_rc_data == 64'hFEED_FACE_0BAD_F00D, "load served by runahead cache")
    ex_op(1, 0, 1, 0, 17, 32'h0000_9A44);                     // skip-listed block
    `CHECK(ma_block && ma_skipped, "skipped prefetch")
    missmsg(6, 18, 32'h0005_5550, 0);                         // gain-load miss
    mere_inst(3'd1, 21, 0, res);
    `CHECK(res == 64'h0005_5550, "m.check_skip returns latest prefetch")
    for (int r = 1; r <= 5; r++) wreg(r, 64'hBAD0 + 64'(r)); // runahead results
    respond(5, 10, 64'h0000_0000_C0DE_0010);                  // stall-load data
    if (rcu_state == ST_MERE_PASS) n_stall_exit++;
    golden[10] = 64'h0000_0000_C0DE_0010;
    wait_for(ST_PSEUDO_EXIT);
    `CHECK(rcu_state == ST_PSEUDO_EXIT, "Pseudo_Exit")
    // a runahead load still draining misses in Pseudo_Exit: released at once
    ma_load_issue = 1; ma_load_rd = 5'd23; cyc(); ma_load_issue = 0;
    missmsg(10, 23, 32'h0007_7770, 0);
    id_rs1 = 5'd23; #1;
    `CHECK(!id_rs1_busy, "Pseudo_Exit miss released")
    wait_for(ST_PSEUDO_ENTRY);
    `CHECK(n_redirect == 1 && redirect_pc == 40'h80_0000_1000, "redirect to stall PC")
    `CHECK(ghr_out == 8'h5A && ras_ptr_out == 3'd3 && ras_out[2] == 40'h10_0000_0008, "GHR/RAS checkpoint")
    respond(6, 18, 64'hDEAD);                                 // late gain-load
    respond(10, 23, 64'hDEAD);                                // late drain-time load
    `CHECK(n_intercept == 2, "late gain-load responses intercepted")
    // MERE results written during runahead (x20, x21) are also restored
    for (int r = 0; r < 32; r++) begin rreg(r); `CHECK(rv == golden[r], $sformatf("x%0d after runahead A", r)) end
    `CHECK(sb_busy == 0 && inv_reg == 0, "scoreboard and invfile clean")
    // ================= B =================
    mere_inst(3'd3, 0, 64'd1, res);                           // set_step 1
    ma_load_issue = 1; ma_load_rd = 5'd14; cyc(); ma_load_issue = 0;
    missmsg(7, 14, 32'h0009_1100);
    stall_on(14, 40'h80_0000_2000);
    missmsg(8, 19, 32'h000A_0A08, 0);
    `CHECK(step_hit, "StepCounter hit")
    wait_for(ST_PSEUDO_ENTRY);
    id_rs1 = 5'd14; #1;
    `CHECK(id_rs1_busy, "stall register busy again after step exit")
    respond(7, 14, 64'h1414);
    golden[14] = 64'h1414;
    id_rs1 = 5'd14; #1;
    `CHECK(!id_rs1_busy && id_rs1_data == 64'h1414, "real stall-load data written")
    // normal execution now needs the block a gain-load is still fetching: the
    // D-cache merges the request into the same MSHR tag, so the refill is real
    ma_load_issue = 1; ma_load_rd = 5'd24; cyc(); ma_load_issue = 0;
    missmsg(8, 24, 32'h000A_0A08, 0);
    respond(8, 24, 64'h2424);
    golden[24] = 64'h2424;
    id_rs1 = 5'd24; #1;
    `CHECK(!id_rs1_busy && id_rs1_data == 64'h2424, "merged normal request not intercepted")
    mere_inst(3'd4, 0, 64'd0, res);                           // clear_step
    mere_inst(3'd0, 22, 0, res);
    `CHECK(res == 0, "m.check_mode = 0 after runahead")
    golden[22] = 0;
    // ================= C =================
    ma_load_issue = 1; ma_load_rd = 5'd9; cyc(); ma_load_issue = 0;
    missmsg(9, 9, 32'h0003_0000);
    stall_on(9, 40'h80_0000_3000);
    mshr_idle = 4'd2; cyc();
    `CHECK(rcu_state == ST_MERE_EXEC_ERR, "Execute_Error on MSHR shortage")
    wait_for(ST_PSEUDO_ENTRY);
    mshr_idle = 4'd4;
    respond(9, 9, 64'h0909); golden[9] = 64'h0909;
    for (int r = 0; r < 32; r++) begin rreg(r); `CHECK(rv == golden[r], $sformatf("x%0d at end", r)) end
    n_restore = n_redirect;
    // ================= mechanism coverage =================
    $display("enter=%0d rcu_rel=%0d pmu_rel=%0d block=%0d rc_hit=%0d skip=%0d icpt=%0d pexit=%0d redirect=%0d front=%0d err=%0d mere=%0d",
             n_enter, n_release_rcu, n_release_pmu, n_block, n_rc_hit, n_skip, n_intercept, n_pexit, n_redirect,
             n_front, n_error, n_mere);
    `CHECK(n_enter == 3, "three runaheads entered")
    `CHECK(n_release_rcu >= 4, "RCU releases")
    `CHECK(n_release_pmu >= 2, "PMU releases")
    `CHECK(n_block >= 3, "blocks")
    `CHECK(n_rc_hit >= 1, "runahead cache hits")
    `CHECK(n_skip >= 1, "skips")
    `CHECK(n_intercept >= 1, "intercepts")
    `CHECK(n_pexit >= 1, "pseudo exits")
    `CHECK(n_redirect == 3 && n_front == 3, "restores")
    `CHECK(n_error == 1, "execute errors")
    `CHECK(n_mere >= 6, "MERE instructions")
    `CHECK(n_step_exit >= 1 && n_stall_exit == 1, "both exit conditions")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
