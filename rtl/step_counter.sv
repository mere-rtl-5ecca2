// step_counter: the StepCounter that ends a runahead after a software-chosen
// number of prefetch steps.
//
// m.set_step loads the step limit (5 bits, as the overview figure prints
// "StepCounter(5.w)"); m.clear_step loads the running count from its rs1
// operand and disarms the limit.  While the runahead is active every prefetch
// request sent to memory is one step.  `hit` is high while the count has
// reached a non-zero limit; the runahead FSM then leaves MERE_Execute.  What
// counts as a step and the zero-disables rule are this design's choices; the
// paper says only that the step decides when to end runahead.  The count is
// cleared automatically when a runahead ends (run falls), the limit is kept
// so that software sets it once per runahead thread.
module step_counter #(
  parameter int unsigned STEP_W = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              set_step,    // m.set_step: limit <= step_val
  input  logic              clear_step,  // m.clear_step: count <= step_val, limit <= 0
  input  logic [STEP_W-1:0] step_val,
  input  logic              run,         // runahead active
  input  logic              step,        // one prefetch issued
  output logic [STEP_W-1:0] count,
  output logic [STEP_W-1:0] limit,
  output logic              hit
);
  logic run_q;

  assign hit = (limit != '0) && (count >= limit);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      limit <= '0;
      run_q <= 1'b0;
    end else begin
      run_q <= run;
      if (clear_step) begin
        count <= step_val;
        limit <= '0;
      end else begin
        if (set_step) limit <= step_val;
        if (run_q && !run)                  count <= '0;
        else if (run && step && count != '1) count <= count + 1'b1;
      end
    end
  end
endmodule
