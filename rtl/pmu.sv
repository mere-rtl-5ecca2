// pmu: Prefetch Management Unit.
//
// Lets loads and stores run during runahead without doing harm.  It joins
// the Invalid-Set Unit (isu), the runahead cache (runahead_cache) and a
// small skip list:
//  - An EX-stage runahead load looks up the runahead cache with its address;
//    hit and data are registered and offered at the MA stage to the load
//    data multiplexer, which prefers them over the D-cache.
//  - An EX-stage runahead store with a valid base register writes the
//    runahead cache instead of the D-cache; every runahead store is blocked
//    from the D-cache at MA.
//  - m.skip_prefetch puts a block address on the skip list; a runahead load
//    to a listed block is blocked at MA like a load with an invalid address,
//    its rd is marked invalid and released.  This is how the software skips a
//    prefetch that would evict useful data.
//  - ma_block (to the LSU) is the ISU block, the skip block or a store.
// The skip list depth and its round-robin replacement are this design's
// choice.  `flush` at the end of a runahead clears the runahead cache, both
// invfiles and the skip list.  EX inputs are sampled at the clock edge; MA
// outputs are registered, release follows one cycle after block.
module pmu #(
  parameter int unsigned XLEN         = 64,
  parameter int unsigned NREGS        = 32,
  parameter int unsigned PADDR_W      = 32,
  parameter int unsigned RC_SETS      = 8,
  parameter int unsigned RC_WAYS      = 2,
  parameter int unsigned RC_WORD_W    = 32,
  parameter int unsigned SKIP_ENTRIES = 4,
  localparam int unsigned IDX_W       = $clog2(NREGS),
  localparam int unsigned BLK_W       = 2 * RC_WORD_W,
  localparam int unsigned OFF_W       = $clog2(BLK_W / 8),
  localparam int unsigned RC_ENT      = RC_SETS * RC_WAYS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  logic               flush,
  input  logic               set_valid,
  input  logic [IDX_W-1:0]   set_rd,
  // EX stage
  input  logic               ex_valid,
  input  logic [IDX_W-1:0]   ex_rs1,
  input  logic               ex_use_rs1,
  input  logic [IDX_W-1:0]   ex_rs2,
  input  logic               ex_use_rs2,
  input  logic [IDX_W-1:0]   ex_rd,
  input  logic               ex_wen,
  input  logic               ex_load,
  input  logic               ex_store,
  input  logic [PADDR_W-1:0] ex_addr,
  input  logic [1:0]         ex_size,
  input  logic [XLEN-1:0]    ex_sdata,
  // skip list (from the mini decoder)
  input  logic               skip_valid,
  input  logic [PADDR_W-1:0] skip_addr,
  // MA stage
  output logic               ma_block,
  output logic               ma_rc_hit,
  output logic [BLK_W-1:0]   ma_rc_data,
  output logic               ma_skipped,
  output logic               rel_valid,
  output logic [IDX_W-1:0]   rel_rd,
  output logic [NREGS-1:0]   inv_reg
);
  localparam int unsigned ENT_W = $clog2(RC_ENT);

  // ---------------- skip list ----------------
  logic [PADDR_W-OFF_W-1:0] skip_blk [SKIP_ENTRIES];
  logic [SKIP_ENTRIES-1:0]  skip_v;
  logic [$clog2(SKIP_ENTRIES)-1:0] skip_wp;
  logic ex_skip;

  always_comb begin
    ex_skip = 1'b0;
    for (int unsigned k = 0; k < SKIP_ENTRIES; k++)
      if (skip_v[k] && skip_blk[k] == ex_addr[PADDR_W-1:OFF_W]) ex_skip = 1'b1;
    ex_skip = ex_skip && run && ex_valid && ex_load;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      skip_v  <= '0;
      skip_wp <= '0;
    end else if (flush) begin
      skip_v  <= '0;
      skip_wp <= '0;
    end else if (skip_valid) begin
      skip_v[skip_wp] <= 1'b1;
      skip_wp         <= skip_wp + 1'b1;
    end
  end
  always_ff @(posedge clk)
    if (skip_valid && !flush) skip_blk[skip_wp] <= skip_addr[PADDR_W-1:OFF_W];

  // ---------------- runahead cache ----------------
  logic [RC_ENT-1:0] inv_addr;
  logic              rc_hit, rc_match;
  logic [ENT_W-1:0]  rc_entry, rc_wr_entry;
  logic [BLK_W-1:0]  rc_data;
  logic              st_ok;

  assign st_ok = run && ex_valid && ex_store && !(ex_use_rs1 && inv_reg[ex_rs1]);

  runahead_cache #(.SETS(RC_SETS), .WAYS(RC_WAYS), .WORD_W(RC_WORD_W), .PADDR_W(PADDR_W)) u_rc (
    .clk, .rst_n, .flush,
    .inv_bits (inv_addr),
    .lk_en    (run && ex_valid && ex_load),
    .lk_addr  (ex_addr),
    .lk_size  (ex_size),
    .hit      (rc_hit),
    .tag_match(rc_match),
    .entry    (rc_entry),
    .data     (rc_data),
    .wr_en    (st_ok),
    .wr_addr  (ex_addr),
    .wr_size  (ex_size),
    .wr_data  (BLK_W'(ex_sdata)),
    .wr_entry (rc_wr_entry)
  );

  // ---------------- invalid-set unit ----------------
  logic isu_block;
  isu #(.NREGS(NREGS), .RC_ENTRIES(RC_ENT)) u_isu (
    .clk, .rst_n, .run, .flush, .set_valid, .set_rd,
    .ex_valid, .ex_rs1, .ex_use_rs1, .ex_rs2, .ex_use_rs2, .ex_rd, .ex_wen,
    .ex_load, .ex_store,
    .ex_kill     (ex_skip),
    .ex_rc_match (ex_store ? 1'b1 : rc_match),
    .ex_rc_entry (ex_store ? rc_wr_entry : rc_entry),
    .inv_reg,
    .inv_addr,
    .ma_block    (isu_block),
    .rel_valid, .rel_rd
  );

  // ---------------- MA stage ----------------
  logic st_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ma_rc_hit  <= 1'b0;
      ma_skipped <= 1'b0;
      st_q       <= 1'b0;
    end else begin
      ma_rc_hit  <= rc_hit && !(ex_use_rs1 && inv_reg[ex_rs1]);
      ma_skipped <= ex_skip;
      st_q       <= run && ex_valid && ex_store;
    end
  end
  always_ff @(posedge clk) ma_rc_data <= rc_data;

  assign ma_block = isu_block || st_q;
endmodule
