// tb_scoreboard: drives random set, clear and the two release inputs into
// the scoreboard for 2000 cycles and compares every bit and both read ports
// with a reference bit vector kept in the testbench.
`include "tb_common.svh"
module tb_scoreboard;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic set_en = 0, clr_en = 0, rel_rcu_en = 0, rel_pmu_en = 0;
  logic [4:0] set_rd = 0, clr_rd = 0, rel_rcu_rd = 0, rel_pmu_rd = 0, rs1 = 0, rs2 = 0;
  logic rs1_busy, rs2_busy;
  logic [31:0] busy, model;
  int n_rel = 0;
  always #5 clk = ~clk;
  scoreboard dut (.*);

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    model = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      set_en = $urandom_range(0, 1); set_rd = 5'($urandom);
      clr_en = $urandom_range(0, 3) == 0; clr_rd = 5'($urandom);
      rel_rcu_en = $urandom_range(0, 3) == 0; rel_rcu_rd = 5'($urandom);
      rel_pmu_en = $urandom_range(0, 3) == 0; rel_pmu_rd = $urandom_range(0,1) ? set_rd : 5'($urandom);
      rs1 = 5'($urandom); rs2 = 5'($urandom);
      #1;
      `CHECK(rs1_busy == model[rs1] && rs2_busy == model[rs2], "read ports")
      @(posedge clk);
      if (set_en) model[set_rd] = 1'b1;
      if (clr_en) model[clr_rd] = 1'b0;
      if (rel_rcu_en) begin model[rel_rcu_rd] = 1'b0; n_rel++; end
      if (rel_pmu_en) begin model[rel_pmu_rd] = 1'b0; n_rel++; end
      model[0] = 1'b0;
      #1;
      `CHECK(busy == model, "busy vector")
    end
    `CHECK(n_rel > 100, "releases exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
