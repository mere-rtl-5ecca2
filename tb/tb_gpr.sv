// tb_gpr: random writes through the pipeline and long-latency ports (with
// random intercepts) and random checkpoint restores, compared with a
// reference register array; reads on the two ID ports and the four
// checkpoint read ports are checked every cycle, x0 must read zero.
`include "tb_common.svh"
module tb_gpr;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [4:0]  rs1 = 0, rs2 = 0, wb_rd = 0, ll_rd = 0;
  logic [63:0] rs1_data, rs2_data, wb_data = 0, ll_data = 0;
  logic wb_en = 0, ll_en = 0, intercept = 0, cp_wr_en = 0;
  logic [4:0]  cp_rd_idx [4], cp_wr_idx [4];
  logic [63:0] cp_rd_data [4], cp_wr_data [4];
  logic [63:0] model [32];
  int n_icpt = 0;
  always #5 clk = ~clk;
  gpr dut (.*);

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int r = 0; r < 32; r++) model[r] = '0;
    for (int j = 0; j < 4; j++) begin cp_rd_idx[j] = 0; cp_wr_idx[j] = 0; cp_wr_data[j] = 0; end
    // initialise every register through the restore port (8 cycles of 4)
    for (int k = 0; k < 8; k++) begin
      @(negedge clk);
      cp_wr_en = 1;
      for (int j = 0; j < 4; j++) begin cp_wr_idx[j] = 5'(4*k+j); cp_wr_data[j] = 64'(4*k+j); model[4*k+j] = 64'(4*k+j); end
    end
    @(negedge clk); cp_wr_en = 0;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      rs1 = 5'($urandom); rs2 = 5'($urandom);
      for (int j = 0; j < 4; j++) cp_rd_idx[j] = 5'($urandom);
      #1;
      `CHECK(rs1_data == (rs1 == 0 ? 64'd0 : model[rs1]), "rs1 read")
      `CHECK(rs2_data == (rs2 == 0 ? 64'd0 : model[rs2]), "rs2 read")
      for (int j = 0; j < 4; j++)
        `CHECK(cp_rd_data[j] == (cp_rd_idx[j] == 0 ? 64'd0 : model[cp_rd_idx[j]]), "checkpoint read")
      wb_en = $urandom_range(0, 1); wb_rd = 5'($urandom); wb_data = {$urandom, $urandom};
      ll_en = $urandom_range(0, 1); ll_rd = 5'($urandom); ll_data = {$urandom, $urandom};
      while (wb_en && ll_en && ll_rd == wb_rd) ll_rd = 5'($urandom);
      intercept = $urandom_range(0, 2) == 0;
      cp_wr_en = $urandom_range(0, 9) == 0;
      for (int j = 0; j < 4; j++) begin cp_wr_idx[j] = 5'(4*j + $urandom_range(0, 3)); cp_wr_data[j] = {$urandom, $urandom}; end
      @(posedge clk);
      if (cp_wr_en) for (int j = 0; j < 4; j++) model[cp_wr_idx[j]] = cp_wr_data[j];
      else begin
        if (ll_en && !intercept) model[ll_rd] = ll_data;
        if (ll_en && intercept) n_icpt++;
        if (wb_en) model[wb_rd] = wb_data;
      end
    end
    `CHECK(n_icpt > 50, "intercepts exercised")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
