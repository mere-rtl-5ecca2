// tb_rcu: runs the runahead control unit through four scenarios, with the
// testbench playing the core, the caches and an 8-cycle checkpoint:
//  1. entry on an indirect L2 miss, a gain-load, exit on the stall-load's
//     data through Pseudo_Exit (3 drain cycles), restore, redirect to
//     Stall_PC, and the late gain-load response intercepted;
//  2. exit on the StepCounter straight to Normal_Exit, stall register
//     re-marked busy, its late response not intercepted;
//  3. no entry with only two idle MSHRs or without an L2 miss;
//  4. errors: too few MSHRs terminates, conflicts retry three times and
//     terminate on the fourth.
// Cycle counts of the entry (1 + 8 cycles) and the exit path are checked.
`include "tb_common.svh"
module tb_rcu;
  import mere_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic miss_valid = 0, l2acq_valid = 0, resp_valid = 0, hazard = 0;
  logic [6:0] miss_tag = 0, l2acq_tag = 0, resp_tag = 0;
  logic [31:0] miss_addr = 0;
  miss_cmd_e miss_cmd = CMD_LOAD;
  logic [4:0] miss_rd = 0, hazard_rs = 0;
  logic [3:0] mshr_idle = 4'd8;
  logic [39:0] stall_pc_in = 0;
  logic set_step = 0, clear_step = 0;
  logic [4:0] step_val = 0;
  logic cp_save, cp_save_done, cp_restore, cp_restore_done;
  rcu_state_e state;
  logic runahead, pseudo_exit, release_valid, inv_set_valid, intercept, ckpt_upd, sb_set_valid;
  logic redirect_valid, hold, flush, step_hit, spec_run;
  logic [4:0] release_rd, inv_set_rd, stall_rd, sb_set_rd;
  logic [39:0] redirect_pc;
  logic [31:0] last_prefetch_addr;
  always #5 clk = ~clk;
  rcu dut (.*);

  // checkpoint model: done on the 8th cycle after the request
  int save_cnt = 0, rest_cnt = 0;
  assign cp_save_done    = save_cnt == 8;
  assign cp_restore_done = rest_cnt == 8;
  always @(posedge clk) begin
    if (cp_save) save_cnt <= 1; else if (save_cnt != 0 && save_cnt < 8) save_cnt <= save_cnt + 1; else save_cnt <= 0;
    if (cp_restore) rest_cnt <= 1; else if (rest_cnt != 0 && rest_cnt < 8) rest_cnt <= rest_cnt + 1; else rest_cnt <= 0;
  end

  int n_state [7];
  always @(posedge clk) if (rst_n) n_state[state]++;

  task automatic miss(input int tag, input int rd, input logic [31:0] a);
    @(negedge clk); miss_valid = 1; miss_tag = 7'(tag); miss_rd = 5'(rd); miss_addr = a; miss_cmd = CMD_LOAD;
    @(negedge clk); miss_valid = 0;
  endtask
  task automatic l2acq(input int tag);
    @(negedge clk); l2acq_valid = 1; l2acq_tag = 7'(tag); @(negedge clk); l2acq_valid = 0;
  endtask
  task automatic wait_state(input rcu_state_e s, output int cyc);
    cyc = 0;
    while (state != s && cyc < 200) begin @(negedge clk); cyc++; end
  endtask
  // returns cycles from hazard to MERE_Execute and checks the stall release
  task automatic enter(input int rd, input logic [39:0] pc, output int cyc);
    bit rel = 0;
    @(negedge clk); hazard = 1; hazard_rs = 5'(rd); stall_pc_in = pc;
    #1 `CHECK(cp_save, "checkpoint save requested on entry")
    @(negedge clk); hazard = 0;
    cyc = 1;
    while (state != ST_MERE_EXECUTE && cyc < 50) begin
      if (release_valid && release_rd == 5'(rd) && inv_set_valid) rel = 1;
      @(negedge clk); cyc++;
    end
    `CHECK(rel, "stall register released and invalidated")
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int c;
    repeat (2) @(posedge clk); rst_n = 1;
    `CHECK(state == ST_PSEUDO_ENTRY && !runahead, "reset state")
    // ---------------- scenario 1 ----------------
    miss(5, 10, 32'h0000_1000);
    l2acq(5);
    enter(10, 40'h80_0000_0100, c);
    `CHECK(c == 9, $sformatf("entry takes 1 + 8 cycles (got %0d)", c))
    `CHECK(runahead && hold == 0, "runahead active")
    @(negedge clk); miss_valid = 1; miss_tag = 7'd6; miss_rd = 5'd11; miss_addr = 32'h0000_5550; #1;
    `CHECK(release_valid && release_rd == 5'd11 && inv_set_valid && inv_set_rd == 5'd11, "gain-load released")
    @(negedge clk); miss_valid = 0;
    `CHECK(last_prefetch_addr == 32'h0000_5550, "latest prefetch address")
    // stall-load data returns
    @(negedge clk); resp_valid = 1; resp_tag = 7'd5; #1;
    `CHECK(ckpt_upd && !intercept, "stall-load data updates checkpoint")
    @(negedge clk); resp_valid = 0;
    `CHECK(state == ST_MERE_PASS, "MERE_Pass after stall data")
    @(negedge clk);
    `CHECK(state == ST_PSEUDO_EXIT && pseudo_exit, "Pseudo_Exit with gain-load outstanding")
    wait_state(ST_NORMAL_EXIT, c);
    `CHECK(c == 3, $sformatf("Pseudo_Exit drains 3 cycles (got %0d)", c))
    `CHECK(cp_restore && flush && !sb_set_valid && hold, "restore and flush on first Normal_Exit cycle")
    c = 0;
    while (!redirect_valid && c < 50) begin @(negedge clk); c++; end
    `CHECK(c == 8 && redirect_pc == 40'h80_0000_0100, $sformatf("redirect to Stall_PC after restore (%0d)", c))
    @(negedge clk);
    `CHECK(state == ST_PSEUDO_ENTRY && !runahead, "back to Pseudo_Entry")
    @(negedge clk); resp_valid = 1; resp_tag = 7'd6; #1;
    `CHECK(intercept, "late gain-load write-back intercepted")
    @(negedge clk); resp_valid = 0;
    // ---------------- scenario 2: step exit ----------------
    @(negedge clk); set_step = 1; step_val = 5'd2; @(negedge clk); set_step = 0;
    miss(7, 12, 32'h0003_3300);
    l2acq(7);
    enter(12, 40'h80_0000_0200, c);
    miss(8, 13, 32'h0001_0008);
    @(negedge clk); resp_valid = 1; resp_tag = 7'd8; #1;
    `CHECK(!intercept, "gain-load response during execute not intercepted")
    @(negedge clk); resp_valid = 0;
    miss(9, 14, 32'h0007_7008);
    `CHECK(step_hit, "StepCounter reached limit")
    resp_valid = 1; resp_tag = 7'd9;
    @(negedge clk); resp_valid = 0;
    `CHECK(state == ST_MERE_PASS, "MERE_Pass on step")
    @(negedge clk);
    `CHECK(state == ST_NORMAL_EXIT && sb_set_valid && sb_set_rd == 5'd12, "straight to Normal_Exit, stall reg re-marked")
    wait_state(ST_PSEUDO_ENTRY, c);
    @(negedge clk); resp_valid = 1; resp_tag = 7'd7; #1;
    `CHECK(!intercept, "stall-load response after exit not intercepted")
    @(negedge clk); resp_valid = 0;
    @(negedge clk); clear_step = 1; step_val = 0; @(negedge clk); clear_step = 0;
    // ---------------- scenario 3: no entry ----------------
    miss(20, 3, 32'h0004_1230);
    l2acq(20);
    mshr_idle = 4'd2;
    @(negedge clk); hazard = 1; hazard_rs = 5'd3; #1;
    `CHECK(!cp_save, "no entry with two idle MSHRs")
    @(negedge clk); hazard = 0; mshr_idle = 4'd4;
    miss(21, 4, 32'h0009_9990);
    @(negedge clk); hazard = 1; hazard_rs = 5'd4; #1;
    `CHECK(!cp_save, "no entry without L2 miss")
    @(negedge clk); hazard = 0;
    `CHECK(state == ST_PSEUDO_ENTRY, "still Pseudo_Entry")
    // enough MSHRs now, but the stall load's data arrives in the hazard cycle
    @(negedge clk); hazard = 1; hazard_rs = 5'd3; resp_valid = 1; resp_tag = 7'd20; #1;
    `CHECK(!cp_save, "no entry when the stall data returns in the same cycle")
    @(negedge clk); hazard = 0; resp_tag = 7'd21; @(negedge clk); resp_valid = 0;
    `CHECK(state == ST_PSEUDO_ENTRY, "still Pseudo_Entry after the same-cycle return")
    // ---------------- scenario 4: errors ----------------
    miss(30, 6, 32'h0002_0040);
    l2acq(30);
    enter(6, 40'h80_0000_0300, c);
    mshr_idle = 4'd1;
    @(negedge clk);
    `CHECK(state == ST_MERE_EXEC_ERR, "too few MSHRs -> Execute_Error")
    @(negedge clk);
    `CHECK(state == ST_MERE_PASS, "Execute_Error -> Pass")
    @(negedge clk);
    `CHECK(state == ST_NORMAL_EXIT, "no retry without MSHRs: terminate")
    mshr_idle = 4'd4;
    wait_state(ST_PSEUDO_ENTRY, c);
    // conflicts: tag 30 is still live, every new miss on it is a conflict
    miss(31, 7, 32'h0005_1110);
    l2acq(31);
    enter(7, 40'h80_0000_0400, c);
    for (int r = 0; r < 4; r++) begin
      @(negedge clk); miss_valid = 1; miss_tag = 7'd30; miss_rd = 5'd20; miss_addr = 32'h0006_0000;
      @(negedge clk); miss_valid = 0;
      `CHECK(state == ST_MERE_EXEC_ERR, $sformatf("conflict %0d -> Execute_Error", r))
      @(negedge clk);
      @(negedge clk);
      if (r < 3) `CHECK(state == ST_MERE_EXECUTE, $sformatf("retry %0d", r))
      else       `CHECK(state == ST_NORMAL_EXIT || state == ST_PSEUDO_EXIT, "fourth error terminates")
    end
    wait_state(ST_PSEUDO_ENTRY, c);
    `CHECK(n_state[ST_MERE_EXEC_ERR] == 5 && n_state[ST_PSEUDO_EXIT] >= 3, "states visited")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
