// tb_step_counter: sets a step limit, counts prefetch steps during a
// runahead and checks that `hit` rises exactly at the limit, that a zero
// limit never hits, that the count clears when the runahead ends and that
// m.clear_step loads the count and disarms the limit.
`include "tb_common.svh"
module tb_step_counter;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic set_step = 0, clear_step = 0, run = 0, step = 0;
  logic [4:0] step_val = 0, count, limit;
  logic hit;
  always #5 clk = ~clk;
  step_counter dut (.*);

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); set_step = 1; step_val = 5'd3;
    @(negedge clk); set_step = 0;
    `CHECK(limit == 5'd3, "limit loaded")
    run = 1;
    for (int i = 1; i <= 4; i++) begin
      `CHECK(hit == (i - 1 >= 3), $sformatf("hit before step %0d", i))
      step = 1; @(negedge clk); step = 0;
      `CHECK(count == 5'(i > 31 ? 31 : i), $sformatf("count after step %0d", i))
    end
    `CHECK(hit == 1'b1, "hit at limit")
    // steps outside runahead do not count
    run = 0; @(negedge clk);
    `CHECK(count == 0, "count cleared at end of runahead")
    step = 1; @(negedge clk); step = 0;
    `CHECK(count == 0, "no count outside runahead")
    // zero limit never hits
    set_step = 1; step_val = 0; @(negedge clk); set_step = 0;
    run = 1;
    repeat (40) begin step = 1; @(negedge clk); `CHECK(hit == 1'b0, "zero limit") end
    step = 0;
    `CHECK(count == 5'd31, "count saturates")
    // clear_step loads count from rs1 and disarms
    set_step = 1; step_val = 5'd4; @(negedge clk); set_step = 0;
    clear_step = 1; step_val = 5'd2; @(negedge clk); clear_step = 0;
    `CHECK(count == 5'd2 && limit == 0 && !hit, "clear_step")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
