// tb_mc_cp: the testbench plays the register file.  It checks that a save
// reads all 32 registers, four per cycle, finishing (save_done) on the 8th
// cycle after `save`; that GHR/RAS are copied in the single save cycle; that
// after the registers are overwritten a restore writes back exactly the
// saved values in 8 cycles, except one register updated through upd_* in
// the middle of the runahead and one updated during the restore itself.
// While the save runs, the pipeline write port writes a random register in
// every cycle (older instructions still completing); the restore must bring
// back those newer values too.
`include "tb_common.svh"
module tb_mc_cp;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic save = 0, restore = 0, save_done, restore_done, busy;
  logic [4:0]  cp_rd_idx [4], cp_wr_idx [4];
  logic [63:0] cp_rd_data [4], cp_wr_data [4];
  logic cp_wr_en;
  logic upd_valid = 0;
  logic [4:0]  upd_idx = 0;
  logic [63:0] upd_data = 0;
  logic wb_upd_valid = 0;
  logic [4:0]  wb_upd_idx = 0;
  logic [63:0] wb_upd_data = 0;
  logic [7:0]  ghr_in = 8'hA5, ghr_out;
  logic [39:0] ras_in [6], ras_out [6];
  logic [2:0]  ras_ptr_in = 3'd4, ras_ptr_out;
  logic front_restore;
  logic [63:0] regs [32], golden [32];
  int cyc;
  always #5 clk = ~clk;
  mc_cp dut (.*);

  always_comb for (int j = 0; j < 4; j++) cp_rd_data[j] = regs[cp_rd_idx[j]];
  always_ff @(posedge clk)
    if (cp_wr_en) for (int j = 0; j < 4; j++) regs[cp_wr_idx[j]] <= cp_wr_data[j];
    else if (wb_upd_valid) regs[wb_upd_idx] <= wb_upd_data;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < 32; r++) begin regs[r] = {$urandom, $urandom}; golden[r] = regs[r]; end
    for (int k = 0; k < 6; k++) ras_in[k] = 40'(k * 16 + 40'h80_0000_0000);
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); save = 1;
    @(negedge clk); save = 0;
    ghr_in = 8'h00; ras_ptr_in = 3'd0; for (int k = 0; k < 6; k++) ras_in[k] = '0;
    `CHECK(ghr_out == 8'hA5 && ras_ptr_out == 3'd4 && ras_out[5] == 40'h80_0000_0050, "front state copied in one cycle")
    cyc = 1;
    while (!save_done) begin
      wb_upd_valid = 1; wb_upd_idx = 5'($urandom_range(1, 31)); wb_upd_data = {$urandom, $urandom};
      golden[wb_upd_idx] = wb_upd_data;
      @(negedge clk); cyc++;
    end
    wb_upd_valid = 1; wb_upd_idx = 5'($urandom_range(1, 31)); wb_upd_data = {$urandom, $urandom};
    golden[wb_upd_idx] = wb_upd_data;
    `CHECK(cyc == 8, $sformatf("save takes 8 cycles (got %0d)", cyc))
    @(negedge clk); wb_upd_valid = 0;
    `CHECK(!busy, "idle after save")
    // runahead scribbles on every register
    for (int r = 0; r < 32; r++) regs[r] = ~golden[r];
    // a normal miss returns for x9 during runahead
    upd_valid = 1; upd_idx = 5'd9; upd_data = 64'h1111_2222_3333_4444;
    @(negedge clk); upd_valid = 0;
    golden[9] = 64'h1111_2222_3333_4444;
    repeat (3) @(negedge clk);
    restore = 1;
    #1 `CHECK(front_restore, "front restore pulse")
    @(negedge clk); restore = 0;
    cyc = 1;
    // x30 is written back in the last restore cycle: update it in that cycle
    while (!restore_done) begin @(negedge clk); cyc++; end
    upd_valid = 1; upd_idx = 5'd30; upd_data = 64'hDEAD_BEEF_0000_0030; golden[30] = upd_data;
    #1;
    `CHECK(cp_wr_en && cp_wr_data[2] == 64'hDEAD_BEEF_0000_0030, "update forwarded into restore")
    @(negedge clk); upd_valid = 0;
    `CHECK(cyc == 8, $sformatf("restore takes 8 cycles (got %0d)", cyc))
    for (int r = 0; r < 32; r++) `CHECK(regs[r] == golden[r], $sformatf("x%0d restored", r))
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
