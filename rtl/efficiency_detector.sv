// efficiency_detector: the Efficiency Detector (ED) of the runahead control unit.
//
// For each D-cache load miss it answers two questions the paper asks before a
// runahead may start: is this access indirect, and are more than two MSHRs
// idle?  The paper gives only these two questions.  How indirectness is
// judged is this design's choice: the detector remembers the previous miss
// address and the address delta before it; a miss whose delta from the
// previous miss differs from that remembered delta is not part of a stride
// (which the D-cache stride prefetcher would already cover) and is reported
// as indirect.  Until two earlier misses have been seen every miss counts as
// indirect.
//
// Which MSHRs are counted the paper leaves open; its FSM description speaks
// of "an L2 cache MSHR miss with sufficient resources", so the default is
// the L2's 8 MSHRs (with the L1's 4, a runahead would hit the "idle MSHR <=
// 2" error after its first prefetch).
//
// Interface: miss_valid/miss_addr is the miss message of the D-cache MSHR,
// mshr_idle the number of idle L2 MSHRs.  indirect and enough_mshr are
// combinational on the current inputs; the history registers update at the
// clock edge of a valid miss.
module efficiency_detector #(
  parameter int unsigned PADDR_W  = 32,
  parameter int unsigned N_MSHR   = 8,
  parameter int unsigned MIN_IDLE = 3,   // "idle MSHR exceeds two"
  parameter int unsigned LINE_OFF = 3    // 64-bit line: low 3 bits ignored
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        miss_valid,
  input  logic [PADDR_W-1:0]          miss_addr,
  input  logic [$clog2(N_MSHR+1)-1:0] mshr_idle,
  output logic                        indirect,
  output logic                        enough_mshr
);
  logic [PADDR_W-1:0] last_addr, last_delta, delta;
  logic [1:0]         seen;   // number of earlier misses in the history (saturates at 2)

  assign delta       = (miss_addr >> LINE_OFF) - (last_addr >> LINE_OFF);
  assign indirect    = (seen != 2'd2) || (delta != last_delta);
  assign enough_mshr = (32'(mshr_idle) >= MIN_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_addr  <= '0;
      last_delta <= '0;
      seen       <= '0;
    end else if (miss_valid) begin
      last_addr  <= miss_addr;
      last_delta <= delta;
      if (seen != 2'd2) seen <= seen + 2'd1;
    end
  end
endmodule
