// tb_runahead_cache: directed checks of the runahead cache: store then load
// of all sizes and offsets, word-valid rule, two-way allocation, pseudo-LRU
// victim choice (the less recently used way is evicted), the INV bit
// suppressing a hit, and flush; followed by 3000 random stores/loads on a
// small address range compared with a byte-level reference model that
// follows the same placement policy.
`include "tb_common.svh"
module tb_runahead_cache;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, flush = 0, lk_en = 0, wr_en = 0;
  logic [15:0] inv_bits = 0;
  logic [31:0] lk_addr = 0, wr_addr = 0;
  logic [1:0]  lk_size = 0, wr_size = 0;
  logic hit, tag_match;
  logic [3:0] entry, wr_entry;
  logic [63:0] data, wr_data = 0;
  always #5 clk = ~clk;
  runahead_cache dut (.*);

  // reference: per set two ways with tag, line valid, word valid, bytes; one plru bit
  typedef struct { bit v; logic [25:0] tag; bit [1:0] wv; logic [63:0] d; } line_t;
  line_t ref_l [8][2];
  bit    ref_p [8];

  function automatic bit [1:0] words(input int off, input int sz);
    int last = off + (1 << sz) - 1;
    return {bit'(last >= 4), bit'(off < 4)};
  endfunction

  task automatic store(input logic [31:0] a, input int sz, input logic [63:0] d);
    int s = a[5:3]; int off = a[2:0]; int w; bit h = 0;
    logic [63:0] m = ((64'd1 << (8 << sz)) - 1) << (8 * off);
    if (sz == 3) m = '1;
    @(negedge clk); wr_en = 1; wr_addr = a; wr_size = 2'(sz); wr_data = d;
    w = ref_p[s];
    for (int k = 1; k >= 0; k--) if (ref_l[s][k].v && ref_l[s][k].tag == a[31:6]) begin h = 1; w = k; end
    if (!h) begin
      if (!ref_l[s][0].v) w = 0; else if (!ref_l[s][1].v) w = 1;
      ref_l[s][w].v = 1; ref_l[s][w].tag = a[31:6]; ref_l[s][w].wv = 0; ref_l[s][w].d = 0;
    end
    #1 `CHECK(wr_entry == 4'({s[2:0], w[0]}), "write entry")
    ref_l[s][w].wv |= words(off, sz);
    ref_l[s][w].d = (ref_l[s][w].d & ~m) | ((d << (8 * off)) & m);
    ref_p[s] = ~w[0];
    @(negedge clk); wr_en = 0;
  endtask

  task automatic load(input logic [31:0] a, input int sz);
    int s = a[5:3]; int off = a[2:0]; bit tm = 0; int w = 0; bit h;
    logic [63:0] m = (sz == 3) ? '1 : (64'd1 << (8 << sz)) - 1;
    lk_en = 1; lk_addr = a; lk_size = 2'(sz); #1;
    for (int k = 1; k >= 0; k--) if (ref_l[s][k].v && ref_l[s][k].tag == a[31:6]) begin tm = 1; w = k; end
    h = tm && ((ref_l[s][w].wv & words(off, sz)) == words(off, sz)) && !inv_bits[{s[2:0], w[0]}];
    `CHECK(tag_match == tm, $sformatf("tag_match %h", a))
    `CHECK(hit == h, $sformatf("hit %h", a))
    if (h) `CHECK((data & m) == ((ref_l[s][w].d >> (8 * off)) & m), $sformatf("data %h", a))
    if (tm) ref_p[s] = ~w[0];
    @(negedge clk); lk_en = 0;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int s = 0; s < 8; s++) begin ref_p[s] = 0; for (int w = 0; w < 2; w++) ref_l[s][w] = '{0, 0, 0, 0}; end
    repeat (2) @(posedge clk); rst_n = 1;
    // store a doubleword, read back bytes/halves/words/doubleword
    store(32'h0000_1008, 3, 64'h8877_6655_4433_2211);
    load(32'h0000_1008, 3);
    `CHECK(hit && data == 64'h8877_6655_4433_2211, "doubleword back")
    load(32'h0000_100C, 2);
    `CHECK(hit && data[31:0] == 32'h8877_6655, "upper word")
    load(32'h0000_100B, 0);
    `CHECK(hit && data[7:0] == 8'h44, "byte 3")
    // a word store only validates its word
    store(32'h0000_2010, 2, 64'h0000_0000_AABB_CCDD);
    load(32'h0000_2010, 2);
    `CHECK(hit, "written word hits")
    load(32'h0000_2014, 2);
    `CHECK(!hit && tag_match, "unwritten word misses")
    // set 1 (0x1008) holds tag 0x40; add a second tag, touch the first, add a third: second is evicted
    store(32'h0000_3008, 3, 64'h1);
    load(32'h0000_1008, 3);
    store(32'h0000_5008, 3, 64'h2);
    load(32'h0000_3008, 3);
    `CHECK(!tag_match, "least recently used way evicted")
    load(32'h0000_1008, 3);
    `CHECK(hit, "recently used way kept")
    // INV bit of the entry suppresses the hit
    inv_bits[{3'd1, 1'b0}] = 1; inv_bits[{3'd1, 1'b1}] = 1;
    load(32'h0000_1008, 3);
    `CHECK(!hit && tag_match, "INV bit blocks hit")
    inv_bits = 0;
    // flush empties the cache
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int s = 0; s < 8; s++) for (int w = 0; w < 2; w++) ref_l[s][w].v = 0;
    load(32'h0000_1008, 3);
    `CHECK(!tag_match && !hit, "flushed")
    // random
    for (int i = 0; i < 3000; i++) begin
      int sz = $urandom_range(0, 3);
      logic [31:0] a = {22'($urandom_range(0, 3)), 7'($urandom), 3'b0};
      a[2:0] = 3'($urandom_range(0, 7)) & ~3'((1 << sz) - 1);
      if ($urandom_range(0, 1)) store(a, sz, {$urandom, $urandom}); else load(a, sz);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
