// tb_mini_decoder: applies each of the five MERE instructions (custom-0
// opcode, funct3 0..4) and some ordinary instructions to the mini decoder
// and checks the control pulses and the rd results.
`include "tb_common.svh"
module tb_mini_decoder;
  import mere_pkg::*;
  int checks = 0, failures = 0;
  logic ma_valid = 0, runahead = 0;
  logic [31:0] ma_inst = 0;
  logic [63:0] ma_rs1_val = 0;
  logic [31:0] last_prefetch_addr = 32'hCAFE_0040;
  logic is_mere, wb_en, set_step, clear_step, skip_valid;
  logic [4:0] wb_rd, step_val;
  logic [63:0] wb_data;
  logic [31:0] skip_addr;
  mini_decoder dut (.*);

  function automatic logic [31:0] enc(input logic [2:0] f3, input logic [4:0] rd, input logic [4:0] rs1);
    return {7'd0, 5'd0, rs1, f3, rd, 7'b0001011};
  endfunction

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ma_valid = 1;
    // check_mode outside and inside runahead
    ma_inst = enc(3'd0, 5'd7, 5'd0); runahead = 0; #1;
    `CHECK(is_mere && wb_en && wb_rd == 7 && wb_data == 0, "check_mode normal")
    runahead = 1; #1;
    `CHECK(wb_en && wb_data == 1, "check_mode runahead")
    // check_skip returns latest prefetch address
    ma_inst = enc(3'd1, 5'd9, 5'd0); #1;
    `CHECK(wb_en && wb_rd == 9 && wb_data == 64'hCAFE_0040, "check_skip")
    // skip_prefetch
    ma_inst = enc(3'd2, 5'd0, 5'd3); ma_rs1_val = 64'h0000_0000_1234_5678; #1;
    `CHECK(skip_valid && !wb_en && skip_addr == 32'h1234_5678 && !set_step && !clear_step, "skip_prefetch")
    // set_step
    ma_inst = enc(3'd3, 5'd0, 5'd3); ma_rs1_val = 64'd6; #1;
    `CHECK(set_step && step_val == 5'd6 && !clear_step && !skip_valid, "set_step")
    // clear_step
    ma_inst = enc(3'd4, 5'd0, 5'd3); ma_rs1_val = 64'd0; #1;
    `CHECK(clear_step && step_val == 5'd0 && !set_step, "clear_step")
    // unused funct3 and other opcodes
    ma_inst = enc(3'd5, 5'd1, 5'd1); #1;
    `CHECK(!is_mere && !wb_en, "funct3 5 not MERE")
    ma_inst = 32'h0000_0013; #1;   // addi x0,x0,0
    `CHECK(!is_mere && !wb_en && !set_step && !skip_valid, "nop not MERE")
    // invalid stage
    ma_inst = enc(3'd3, 5'd0, 5'd3); ma_valid = 0; #1;
    `CHECK(!is_mere && !set_step, "bubble ignored")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
