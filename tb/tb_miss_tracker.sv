// tb_miss_tracker: random allocations, L2 acquires and responses on a small
// set of tags against a reference table in the testbench; checks conflict,
// fail, the response fields, the stall-load look-up by register, the
// speculative count and that Wptr - Rptr equals the live entries.
`include "tb_common.svh"
module tb_miss_tracker;
  import mere_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic alloc_valid = 0, alloc_spec = 0, alloc_indirect = 0, l2acq_valid = 0, resp_valid = 0;
  logic [6:0] alloc_tag = 0, l2acq_tag = 0, resp_tag = 0, stall_tag;
  logic [31:0] alloc_addr = 0, stall_addr, resp_addr;
  miss_cmd_e alloc_cmd = CMD_LOAD;
  logic [4:0] alloc_rd = 0, find_rd = 0, resp_rd;
  logic stall_found, stall_l2miss, stall_indirect, conflict, fail, resp_live, resp_spec;
  logic [7:0] spec_cnt, rptr, wptr;
  always #5 clk = ~clk;
  miss_tracker dut (.*);

  typedef struct { bit v, s, l2, ind; miss_cmd_e c; logic [4:0] rd; logic [31:0] a; } ent_t;
  ent_t m [128];
  int n_conf = 0, n_fail = 0, n_found = 0;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 128; t++) m[t] = '{0, 0, 0, 0, CMD_NONE, 0, 0};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int live, sc, found_t;
      @(negedge clk);
      alloc_valid = $urandom_range(0, 2) == 0; alloc_tag = 7'($urandom_range(0, 15));
      alloc_addr = $urandom; alloc_rd = 5'($urandom_range(1, 7)); alloc_spec = $urandom_range(0, 1);
      alloc_indirect = $urandom_range(0, 1); alloc_cmd = $urandom_range(0, 3) == 0 ? CMD_STORE : CMD_LOAD;
      l2acq_valid = $urandom_range(0, 2) == 0; l2acq_tag = 7'($urandom_range(0, 15));
      resp_valid = $urandom_range(0, 2) == 0; resp_tag = 7'($urandom_range(0, 15));
      find_rd = 5'($urandom_range(1, 7));
      #1;
      `CHECK(conflict == (alloc_valid && m[alloc_tag].v), "conflict")
      `CHECK(fail == (resp_valid && !m[resp_tag].v), "fail")
      `CHECK(resp_live == (resp_valid && m[resp_tag].v), "resp_live")
      if (resp_valid && m[resp_tag].v)
        `CHECK(resp_spec == m[resp_tag].s && resp_rd == m[resp_tag].rd && resp_addr == m[resp_tag].a, "resp fields")
      found_t = -1;
      for (int t = 0; t < 128; t++)
        if (found_t < 0 && m[t].v && !m[t].s && m[t].c == CMD_LOAD && m[t].rd == find_rd) found_t = t;
      `CHECK(stall_found == (found_t >= 0), "stall_found")
      if (found_t >= 0) begin
        n_found++;
        `CHECK(stall_tag == 7'(found_t) && stall_l2miss == m[found_t].l2 && stall_indirect == m[found_t].ind
               && stall_addr == m[found_t].a, "stall fields")
      end
      if (conflict) n_conf++;
      if (fail) n_fail++;
      @(posedge clk);
      if (resp_valid && m[resp_tag].v && !(alloc_valid && alloc_tag == resp_tag)) m[resp_tag].v = 0;
      if (l2acq_valid && !(alloc_valid && alloc_tag == l2acq_tag)) m[l2acq_tag].l2 = 1;
      if (alloc_valid) m[alloc_tag] = '{1, alloc_spec, 0, alloc_indirect, alloc_cmd, alloc_rd, alloc_addr};
      #1;
      live = 0; sc = 0;
      for (int t = 0; t < 128; t++) begin live += int'(m[t].v); sc += int'(m[t].v && m[t].s); end
      `CHECK(int'(8'(wptr - rptr)) == live, "wptr - rptr = live entries")
      `CHECK(int'(spec_cnt) == sc, "spec count")
    end
    `CHECK(n_conf > 20 && n_fail > 20 && n_found > 100, "events exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
