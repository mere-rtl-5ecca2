// miss_tracker: trace table of outstanding D-cache misses (the MSHR trace of
// the runahead control unit).
//
// Each miss message from the D-cache MSHR is written into the entry selected
// by its tag (tags 0x00..0x7F, so 128 entries, as printed in the RCU figure)
// with its address, command (01 = load), write-back register and two flags:
// `spec` for a miss issued during runahead (a gain-load) and `indirect` from
// the efficiency detector.  An L2 MSHR acquire for the same tag sets
// `l2miss`.  A memory response frees the entry of its tag.  Wptr counts
// allocations and Rptr counts retirements, so the table is empty when they
// are equal; responses may come back in any order, which is why entries are
// found by tag and not by Rptr.
//
// Outputs, all combinational on the current state and inputs:
//  - conflict  : an allocation hits a tag that is still live (address conflict)
//  - fail      : a response arrives for a tag with no live entry
//  - resp_entry: the entry of the responding tag (before it is freed)
//  - stall_*   : the live non-speculative load entry whose rd equals find_rd
//  - spec_cnt  : number of live speculative entries
// A write takes effect at the clock edge.  Allocation and response on the
// same tag in one cycle: the allocation wins.
module miss_tracker
  import mere_pkg::REG_W, mere_pkg::miss_cmd_e, mere_pkg::CMD_LOAD;
#(
  parameter int unsigned TAG_W   = mere_pkg::TAG_W,
  parameter int unsigned PADDR_W = mere_pkg::PADDR_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // allocation from the D-cache MSHR miss message
  input  logic               alloc_valid,
  input  logic [TAG_W-1:0]   alloc_tag,
  input  logic [PADDR_W-1:0] alloc_addr,
  input  miss_cmd_e          alloc_cmd,
  input  logic [REG_W-1:0]   alloc_rd,
  input  logic               alloc_spec,
  input  logic               alloc_indirect,
  // L2 MSHR acquire: the miss also missed in the L2
  input  logic               l2acq_valid,
  input  logic [TAG_W-1:0]   l2acq_tag,
  // response (grant) from the memory side
  input  logic               resp_valid,
  input  logic [TAG_W-1:0]   resp_tag,
  // look-up of the stall-load by register number
  input  logic [REG_W-1:0]   find_rd,
  output logic               stall_found,
  output logic [TAG_W-1:0]   stall_tag,
  output logic               stall_l2miss,
  output logic               stall_indirect,
  output logic [PADDR_W-1:0] stall_addr,
  // status
  output logic               conflict,
  output logic               fail,
  output logic               resp_live,
  output logic               resp_spec,
  output logic [REG_W-1:0]   resp_rd,
  output logic [PADDR_W-1:0] resp_addr,
  output logic [TAG_W:0]     spec_cnt,
  output logic [TAG_W:0]     rptr,
  output logic [TAG_W:0]     wptr
);
  localparam int unsigned N = 1 << TAG_W;

  logic [N-1:0]       valid, spec, l2miss, indir;
  miss_cmd_e          cmd  [N];
  logic [REG_W-1:0]   rdn  [N];
  logic [PADDR_W-1:0] addr [N];

  assign conflict  = alloc_valid && valid[alloc_tag];
  assign resp_live = resp_valid && valid[resp_tag];
  assign fail      = resp_valid && !valid[resp_tag];
  assign resp_spec = resp_live && spec[resp_tag];
  assign resp_rd   = rdn[resp_tag];
  assign resp_addr = addr[resp_tag];

  always_comb begin
    stall_found    = 1'b0;
    stall_tag      = '0;
    for (int unsigned i = 0; i < N; i++) begin
      if (!stall_found && valid[i] && !spec[i] && cmd[i] == CMD_LOAD && rdn[i] == find_rd) begin
        stall_found = 1'b1;
        stall_tag   = TAG_W'(i);
      end
    end
    stall_l2miss   = l2miss[stall_tag];
    stall_indirect = indir[stall_tag];
    stall_addr     = addr[stall_tag];
  end

  always_comb begin
    spec_cnt = '0;
    for (int unsigned i = 0; i < N; i++) spec_cnt += (TAG_W+1)'(valid[i] & spec[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      spec  <= '0;
      rptr  <= '0;
      wptr  <= '0;
    end else begin
      if (resp_live && !(alloc_valid && alloc_tag == resp_tag)) begin
        valid[resp_tag] <= 1'b0;
        spec[resp_tag]  <= 1'b0;
        rptr            <= rptr + 1'b1;
      end
      if (alloc_valid) begin
        valid[alloc_tag] <= 1'b1;
        spec[alloc_tag]  <= alloc_spec;
        wptr             <= wptr + 1'b1;
        // a live tag being overwritten retires its old entry
        if (valid[alloc_tag]) rptr <= rptr + 1'b1
                                      + ((resp_live && alloc_tag != resp_tag) ? (TAG_W+1)'(1) : '0);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_valid) begin
      cmd[alloc_tag]    <= alloc_cmd;
      rdn[alloc_tag]    <= alloc_rd;
      addr[alloc_tag]   <= alloc_addr;
      l2miss[alloc_tag] <= 1'b0;
      indir[alloc_tag]  <= alloc_indirect;
    end
    if (l2acq_valid && !(alloc_valid && alloc_tag == l2acq_tag)) l2miss[l2acq_tag] <= 1'b1;
  end
endmodule
