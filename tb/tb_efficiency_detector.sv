// tb_efficiency_detector: checks the indirect-access and idle-MSHR decisions
// of the efficiency detector against a reference model kept in the
// testbench (last line address and last line delta).  A directed stride run
// and 400 random misses mixing strided and scattered addresses are applied.
`include "tb_common.svh"
module tb_efficiency_detector;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic miss_valid = 0;
  logic [31:0] miss_addr = '0;
  logic [3:0]  mshr_idle = '0;
  logic indirect, enough_mshr;
  always #5 clk = ~clk;

  efficiency_detector dut (.*);

  // reference
  logic [31:0] r_last = 0, r_delta = 0;
  int          r_seen = 0;
  function automatic logic ref_ind(input logic [31:0] a);
    logic [31:0] d = (a >> 3) - (r_last >> 3);
    return (r_seen < 2) || (d != r_delta);
  endfunction

  task automatic do_miss(input logic [31:0] a);
    miss_valid = 1; miss_addr = a;
    #1;
    `CHECK(indirect == ref_ind(a), $sformatf("indirect for %h", a))
    @(posedge clk); #1;
    r_delta = (a >> 3) - (r_last >> 3); r_last = a; if (r_seen < 2) r_seen++;
    miss_valid = 0;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // stride of one line: first two misses unknown -> indirect, then strided
    do_miss(32'h1000); do_miss(32'h1008);
    miss_valid = 1; miss_addr = 32'h1010; #1;
    `CHECK(indirect == 1'b0, "third strided miss not indirect")
    miss_valid = 0;
    do_miss(32'h1010); do_miss(32'h1018);
    miss_valid = 1; miss_addr = 32'h7340; #1;
    `CHECK(indirect == 1'b1, "scattered miss indirect")
    miss_valid = 0;
    // idle MSHRs: must exceed two
    for (int i = 0; i <= 8; i++) begin
      mshr_idle = 4'(i); #1;
      `CHECK(enough_mshr == (i > 2), $sformatf("enough_mshr idle=%0d", i))
    end
    // random mix
    for (int i = 0; i < 400; i++) begin
      logic [31:0] a;
      if ($urandom_range(0, 1)) a = r_last + (r_delta << 3);
      else                      a = $urandom & 32'h000F_FFF8;
      do_miss(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
