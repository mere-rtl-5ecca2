// gpr: the general-purpose register file of the core with the ports MERE adds.
//
// 32 x 64-bit registers, x0 reads as zero.  Two combinational read ports
// serve the ID stage.  Two write ports: the pipeline write-back port (wb_*)
// and the long-latency port (ll_*) used by returning cache misses.  MERE
// adds (a) REGS_PER_CYCLE combinational checkpoint read ports used by the
// multi-cycle checkpoint to copy the registers out, (b) as many restore
// write ports, which take priority over both normal write ports, and (c) the
// intercept gate on the long-latency port: while `intercept` is high a
// returning runahead load may not write its register.  Writes happen on the
// rising clock edge; reads see the old value in the cycle of a write.  Port
// counts and priorities are this design's choice.
module gpr #(
  parameter int unsigned XLEN           = 64,
  parameter int unsigned NREGS          = 32,
  parameter int unsigned REGS_PER_CYCLE = 4,
  localparam int unsigned IDX_W         = $clog2(NREGS)
) (
  input  logic              clk,
  input  logic [IDX_W-1:0]  rs1,
  output logic [XLEN-1:0]   rs1_data,
  input  logic [IDX_W-1:0]  rs2,
  output logic [XLEN-1:0]   rs2_data,
  input  logic              wb_en,
  input  logic [IDX_W-1:0]  wb_rd,
  input  logic [XLEN-1:0]   wb_data,
  input  logic              ll_en,
  input  logic [IDX_W-1:0]  ll_rd,
  input  logic [XLEN-1:0]   ll_data,
  input  logic              intercept,
  input  logic [IDX_W-1:0]  cp_rd_idx  [REGS_PER_CYCLE],
  output logic [XLEN-1:0]   cp_rd_data [REGS_PER_CYCLE],
  input  logic              cp_wr_en,
  input  logic [IDX_W-1:0]  cp_wr_idx  [REGS_PER_CYCLE],
  input  logic [XLEN-1:0]   cp_wr_data [REGS_PER_CYCLE]
);
  logic [XLEN-1:0] regs [NREGS];

  assign rs1_data = (rs1 == '0) ? '0 : regs[rs1];
  assign rs2_data = (rs2 == '0) ? '0 : regs[rs2];
  always_comb
    for (int unsigned j = 0; j < REGS_PER_CYCLE; j++)
      cp_rd_data[j] = (cp_rd_idx[j] == '0) ? '0 : regs[cp_rd_idx[j]];

  always_ff @(posedge clk) begin
    if (cp_wr_en) begin
      for (int unsigned j = 0; j < REGS_PER_CYCLE; j++) regs[cp_wr_idx[j]] <= cp_wr_data[j];
    end else begin
      if (ll_en && !intercept) regs[ll_rd] <= ll_data;
      if (wb_en)               regs[wb_rd] <= wb_data;
    end
  end
endmodule
