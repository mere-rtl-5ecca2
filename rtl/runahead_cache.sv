// runahead_cache: the runahead cache (R$) of the prefetch management unit.
//
// During runahead, stores may not reach the D-cache, so their values are kept
// here and served to later runahead loads.  Following the paper it is a
// two-way set-associative cache of SETS (8) sets whose blocks are two 32-bit
// words (64 bits, one cache line of the system).  An address splits into
// {tag, index, offset}: offset selects the byte in the block, index the set.
//
// Look-up (combinational): both ways of the set are read, each tag is
// compared with the request's tag; a way that matches, whose line is valid,
// whose requested words have been written and whose INV bit (from the ISU's
// address invfile) is clear gives `hit`, and its block, shifted right by the
// offset, is `data` (sign or zero extension stays with the core's load
// formatter).  `tag_match`/`entry` name the matching entry even when it is
// invalid, so the ISU can see an invalid store.
//
// Write (clock edge): a store writes its 1/2/4/8 bytes into the matching way
// or, on a miss, into a victim way: an empty way first, else the way the
// pseudo-LRU bit points at (with two ways the tree is one bit per set).  The
// words it touches become valid; a new line starts with no valid words and
// unwritten bytes as zero.  wr_entry is combinational and names the entry the
// write will use.  `flush` (end of runahead) clears every valid bit.  The
// per-word valid bits and the zero fill are this design's choices.
module runahead_cache #(
  parameter int unsigned SETS    = 8,
  parameter int unsigned WAYS    = 2,
  parameter int unsigned WORD_W  = 32,
  parameter int unsigned PADDR_W = 32,
  localparam int unsigned BLK_W  = 2 * WORD_W,
  localparam int unsigned OFF_W  = $clog2(BLK_W / 8),
  localparam int unsigned IDX_W  = $clog2(SETS),
  localparam int unsigned TAG_W  = PADDR_W - OFF_W - IDX_W,
  localparam int unsigned ENT    = SETS * WAYS,
  localparam int unsigned ENT_W  = $clog2(ENT)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               flush,
  input  logic [ENT-1:0]     inv_bits,     // ADDR invfile of the ISU
  // look-up (runahead load)
  input  logic               lk_en,
  input  logic [PADDR_W-1:0] lk_addr,
  input  logic [1:0]         lk_size,      // log2 of bytes
  output logic               hit,
  output logic               tag_match,
  output logic [ENT_W-1:0]   entry,
  output logic [BLK_W-1:0]   data,
  // write (runahead store)
  input  logic               wr_en,
  input  logic [PADDR_W-1:0] wr_addr,
  input  logic [1:0]         wr_size,
  input  logic [BLK_W-1:0]   wr_data,      // store data in the low bytes
  output logic [ENT_W-1:0]   wr_entry
);
  initial assert (WAYS == 2) else $error("runahead_cache: the one-bit pseudo-LRU needs WAYS == 2");

  logic [TAG_W-1:0] tags  [SETS][WAYS];
  logic [BLK_W-1:0] blks  [SETS][WAYS];
  logic [1:0]       wval  [SETS][WAYS];   // per-word valid
  logic             lval  [SETS][WAYS];   // line valid
  logic [SETS-1:0]  plru;                 // way to replace next

  function automatic logic [1:0] words_of(input logic [OFF_W-1:0] off, input logic [1:0] size);
    logic [OFF_W:0] last;
    last = {1'b0, off} + ((OFF_W+1)'(1) << size) - 1'b1;
    words_of = {last[OFF_W-1] | off[OFF_W-1], ~off[OFF_W-1]};
  endfunction

  // ---------------- look-up ----------------
  logic [IDX_W-1:0] lk_idx;
  logic [TAG_W-1:0] lk_tag;
  logic [OFF_W-1:0] lk_off;
  logic [1:0]       lk_words;
  logic             lk_way;
  assign {lk_tag, lk_idx, lk_off} = lk_addr;
  assign lk_words = words_of(lk_off, lk_size);

  always_comb begin
    tag_match = 1'b0;
    lk_way    = 1'b0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (lval[lk_idx][w] && tags[lk_idx][w] == lk_tag) begin
        tag_match = lk_en;
        lk_way    = w[0];
      end
    entry = {lk_idx, lk_way};
    hit   = tag_match && ((wval[lk_idx][lk_way] & lk_words) == lk_words) && !inv_bits[entry];
    data  = blks[lk_idx][lk_way] >> (8 * lk_off);
  end

  // ---------------- write ----------------
  logic [IDX_W-1:0] wr_idx;
  logic [TAG_W-1:0] wr_tag;
  logic [OFF_W-1:0] wr_off;
  logic             wr_hit, wr_way;
  logic [BLK_W-1:0] wr_bmask, wr_shift;
  assign {wr_tag, wr_idx, wr_off} = wr_addr;

  always_comb begin
    wr_hit = 1'b0;
    wr_way = plru[wr_idx];
    for (int w = WAYS - 1; w >= 0; w--)
      if (lval[wr_idx][w] && tags[wr_idx][w] == wr_tag) begin
        wr_hit = 1'b1;
        wr_way = w[0];
      end
    if (!wr_hit) begin
      if (!lval[wr_idx][0])      wr_way = 1'b0;
      else if (!lval[wr_idx][1]) wr_way = 1'b1;
    end
    wr_entry = {wr_idx, wr_way};
    wr_bmask = '0;
    for (int b = 0; b < BLK_W / 8; b++)
      if (b < (1 << wr_size)) wr_bmask[8*b +: 8] = 8'hFF;
    wr_bmask = wr_bmask << (8 * wr_off);
    wr_shift = wr_data << (8 * wr_off);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      plru <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          lval[s][w] <= 1'b0;
          wval[s][w] <= '0;
        end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          lval[s][w] <= 1'b0;
          wval[s][w] <= '0;
        end
    end else begin
      if (lk_en && tag_match) plru[lk_idx] <= ~lk_way;
      if (wr_en) begin
        lval[wr_idx][wr_way] <= 1'b1;
        wval[wr_idx][wr_way] <= (wr_hit ? wval[wr_idx][wr_way] : 2'b00) | words_of(wr_off, wr_size);
        plru[wr_idx]         <= ~wr_way;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !flush) begin
      tags[wr_idx][wr_way] <= wr_tag;
      blks[wr_idx][wr_way] <= ((wr_hit ? blks[wr_idx][wr_way] : '0) & ~wr_bmask) | (wr_shift & wr_bmask);
    end
  end
endmodule
