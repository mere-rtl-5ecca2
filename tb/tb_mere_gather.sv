// tb_mere_gather: synthesised irregular workloads run on the MERE hardware.
//
// The testbench plays a simple in-order core, a 4 KB 4-way 16-set L1
// D-cache with 4 MSHRs, a 64 KB 8-way L2 with 8 MSHRs (both LRU, 64-byte
// lines) and memory (L2 hit 25 cycles, memory 180 cycles) around mere_top
// at its default parameters -- the cache sizes and latencies of the original
// evaluation -- and runs the gather loop that dominates sparse and graph
// kernels:
//
//   0: ld   x5, 0(x1)      k = idx[i]      (index stream; the D-cache stride
//                                          prefetcher is taken to cover it)
//   1: add  x6, x3, x5     &data[k]
//   2: ld   x7, 0(x6)      v = data[k]     (random over D bytes)  
//   3: add  x4, x4, x7     sum += v        (stalls on the miss)
//   4: addi x1, x1, 8
//   5: bne  x1, x2, 0
//
// The index values are random offsets in [0, D) and memory holds a hash of
// each address, so the expected sum is known in advance.  For D = 24 KB and
// 112 KB (the ends of the footprint range of the original synthesised
// workloads) the loop is run twice from reset: once with runahead kept off (the core tells MERE that
// only two L2 MSHRs are idle, which the efficiency detector refuses), once
// with MERE active.  Both runs must produce the exact sum; the second must
// enter runahead, issue gain-loads, later hit lines those gain-loads
// brought in, and take no more cycles.  The cycle counts and the counts
// of each event are printed.  Last, at D = 112 KB, the number of D-cache
// MSHRs is swept over 1, 2, 4 and 8, as in the original evaluation: with one
// MSHR the stall load leaves nothing to prefetch into and runahead gains
// little; more MSHRs must give fewer cycles.  Finally a second program, the
// key histogram of integer sort (cnt[key[i]]++: load, add one, store), runs
// at D = 112 KB with and without runahead; every counter must end exact,
// which shows that runahead stores never reach memory:
//
//   0: ld x5,0(x1)  1: add x6,x3,x5  2: ld x7,0(x6)  3: addi x7,x7,1
//   4: sd x7,0(x6)  5: addi x1,x1,8  6: bne x1,x2,0
//
// Core model: one instruction per cycle at ID/EX, a load takes one more
// cycle at MA; no instruction issues during a load's MA cycle, while `hold`
// is high, or while the L1 MSHRs are full.  A D-cache miss on a line that is
// already being fetched merges into that MSHR: in normal mode it re-sends
// the miss message with the same tag, in runahead it is dropped.
`include "tb_common.svh"
module tb_mere_gather;
  import mere_pkg::*;
  localparam int          ITER      = 1200;
  int                     d_bytes   = 112 * 1024;   // data footprint D of the run
  localparam logic [31:0] IDX_BASE  = 32'h0010_0000;
  localparam logic [31:0] DATA_BASE = 32'h0040_0000;
  localparam logic [39:0] PC_BASE   = 40'h00_8000_0000;
  localparam int L1_SETS = 16, L1_WAYS = 4, L2_SETS = 128, L2_WAYS = 8, MAX_MSHR = 8, L2_MSHR = 8;
  int            l1_mshr = 4;             // D-cache MSHRs in use (at most MAX_MSHR)
  localparam int LAT_L2 = 25, LAT_MEM = 180;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [4:0] id_rs1 = 0, id_rs2 = 0, hazard_rs = 0;
  logic [63:0] id_rs1_data, id_rs2_data;
  logic id_rs1_busy, id_rs2_busy, hazard = 0, hold, redirect_valid;
  logic [39:0] stall_pc = 0, redirect_pc;
  logic ex_valid = 0, ex_use_rs1 = 0, ex_use_rs2 = 0, ex_wen = 0, ex_load = 0, ex_store = 0;
  logic [4:0] ex_rs1 = 0, ex_rs2 = 0, ex_rd = 0;
  logic [31:0] ex_addr = 0;
  logic [1:0] ex_size = 2'd3;
  logic [63:0] ex_sdata = 0;
  logic ma_valid = 0, ma_load_issue = 0;
  logic [31:0] ma_inst = 0;
  logic [63:0] ma_rs1_val = 0;
  logic [4:0] ma_load_rd = 0;
  logic ma_block, ma_rc_hit, ma_is_mere, mere_wb_en;
  logic [63:0] ma_rc_data, mere_wb_data;
  logic [4:0] mere_wb_rd;
  logic wb_en = 0;
  logic [4:0] wb_rd = 0;
  logic [63:0] wb_data = 0;
  logic miss_valid = 0;
  logic [6:0] miss_tag = 0, l2acq_tag = 0, resp_tag = 0;
  logic [31:0] miss_addr = 0;
  miss_cmd_e miss_cmd = CMD_LOAD;
  logic [4:0] miss_rd = 0, resp_rd = 0;
  logic [3:0] mshr_idle = 4'd8;
  logic l2acq_valid = 0, resp_valid = 0, resp_wen = 0;
  logic [63:0] resp_data = 0;
  logic [7:0] ghr_in = 8'h00, ghr_out;
  logic [39:0] ras_in [6], ras_out [6];
  logic [2:0] ras_ptr_in = 3'd0, ras_ptr_out;
  logic front_restore, runahead, intercept, pmu_release, rcu_release, step_hit, pseudo_exit, ma_skipped;
  rcu_state_e rcu_state;
  logic [31:0] sb_busy, inv_reg;
  always #5 clk = ~clk;

  mere_top dut (.*);

  // ---------------- memory contents ----------------
  function automatic logic [63:0] hash64(input logic [31:0] a);
    logic [63:0] h;
    h = {32'h0, a} * 64'h9E37_79B9_7F4A_7C15;
    return h ^ (h >> 29);
  endfunction
  // words written by committed (normal-mode) stores
  logic [63:0] wmem [logic [31:0]];
  function automatic logic [63:0] load_val(input logic [31:0] a);
    if (wmem.exists(a)) return wmem[a];
    if (a >= IDX_BASE && a < IDX_BASE + 32'(ITER * 8))
      return 64'((hash64(a) >> 8) % 64'(d_bytes / 8)) * 64'd8;
    return hash64(a);
  endfunction

  // ---------------- caches and MSHRs ----------------
  // line-address tags, valid bits and last-use times (LRU) per set and way
  logic [25:0] l1_tag [L1_SETS][L1_WAYS];
  bit          l1_v   [L1_SETS][L1_WAYS];
  bit          l1_pf  [L1_SETS][L1_WAYS];   // filled by a gain-load, not yet used
  longint      l1_use [L1_SETS][L1_WAYS];
  logic [25:0] l2_tag [L2_SETS][L2_WAYS];
  bit          l2_v   [L2_SETS][L2_WAYS];
  longint      l2_use [L2_SETS][L2_WAYS];
  longint      now;
  typedef struct {
    bit          v;
    logic [25:0] line;
    logic [6:0]  tag;
    logic [4:0]  rd;
    logic [31:0] addr;
    longint      due;
    bit          l2m;
    bit          gain;
  } mshr_t;
  mshr_t mshr [MAX_MSHR];
  function automatic bit any_mshr();
    foreach (mshr[k]) if (mshr[k].v) return 1;
    return 0;
  endfunction
  function automatic bit tag_live(input logic [6:0] t);
    foreach (mshr[k]) if (mshr[k].v && mshr[k].tag == t) return 1;
    return 0;
  endfunction
  logic [6:0] next_tag;
  bit         l2acq_pend;
  logic [6:0] l2acq_pend_tag;

  // L1 lookup: returns the hitting way or -1, and marks the way used
  function automatic int l1_find(input logic [25:0] ln);
    int s = int'(ln % L1_SETS);
    for (int w = 0; w < L1_WAYS; w++)
      if (l1_v[s][w] && l1_tag[s][w] == ln) begin l1_use[s][w] = now; return w; end
    return -1;
  endfunction
  function automatic bit l2_hit(input logic [25:0] ln);
    int s = int'(ln % L2_SETS);
    for (int w = 0; w < L2_WAYS; w++)
      if (l2_v[s][w] && l2_tag[s][w] == ln) begin l2_use[s][w] = now; return 1; end
    return 0;
  endfunction
  // fill both levels (inclusive), replacing an invalid or the LRU way
  function automatic void fill(input logic [25:0] ln, input bit pf);
    int s1 = int'(ln % L1_SETS), s2 = int'(ln % L2_SETS), v1 = 0, v2 = 0;
    for (int w = 1; w < L1_WAYS; w++)
      if (l1_v[s1][v1] && (!l1_v[s1][w] || l1_use[s1][w] < l1_use[s1][v1])) v1 = w;
    l1_v[s1][v1] = 1; l1_tag[s1][v1] = ln; l1_use[s1][v1] = now; l1_pf[s1][v1] = pf;
    if (!l2_hit(ln)) begin
      for (int w = 1; w < L2_WAYS; w++)
        if (l2_v[s2][v2] && (!l2_v[s2][w] || l2_use[s2][w] < l2_use[s2][v2])) v2 = w;
      l2_v[s2][v2] = 1; l2_tag[s2][v2] = ln; l2_use[s2][v2] = now;
    end
  endfunction

  // ---------------- event counters ----------------
  int n_rc_hit, n_block;
  int n_enter, n_gain, n_useful, n_icpt, n_pexit, n_ra_merge, n_l2miss;
  rcu_state_e prev_state;
  always @(posedge clk) if (rst_n) begin
    if (prev_state == ST_PSEUDO_ENTRY && rcu_state == ST_MERE_ENTER) n_enter++;
    if (prev_state != ST_PSEUDO_EXIT && rcu_state == ST_PSEUDO_EXIT) n_pexit++;
    n_icpt += int'(intercept);
    n_rc_hit += int'(ma_rc_hit);
    n_block += int'(ma_block);
    prev_state <= rcu_state;
  end

  initial begin
    #40000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // one run of the loop from reset; returns its cycle count and the sum
  task automatic run(input bit mere_on, output longint cycles, output logic [63:0] sum);
    int pc, pc_end;
    int hw;
    bit ma_pending, ma_retry;
    logic [4:0]  ma_rd;
    logic [31:0] ma_addr;
    logic [63:0] a, b;
    bit busy_a, busy_b;
    int k, free;
    rst_n = 0;
    for (int i = 0; i < L1_SETS; i++) for (int w = 0; w < L1_WAYS; w++) begin l1_v[i][w] = 0; l1_pf[i][w] = 0; end
    for (int i = 0; i < L2_SETS; i++) for (int w = 0; w < L2_WAYS; w++) l2_v[i][w] = 0;
    for (int i = 0; i < MAX_MSHR; i++) mshr[i].v = 0;
    wmem.delete();
    pc_end = hist ? 7 : 6;
    next_tag = 0; l2acq_pend = 0; prev_state = ST_PSEUDO_ENTRY;
    n_rc_hit = 0; n_block = 0;
    n_enter = 0; n_gain = 0; n_useful = 0; n_icpt = 0; n_pexit = 0; n_ra_merge = 0; n_l2miss = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    // x1 = &idx[0], x2 = &idx[ITER], x3 = &data[0], x4 = 0
    wb_en = 1;
    wb_rd = 5'd1; wb_data = 64'(IDX_BASE);                 @(negedge clk);
    wb_rd = 5'd2; wb_data = 64'(IDX_BASE + 32'(ITER * 8)); @(negedge clk);
    wb_rd = 5'd3; wb_data = 64'(DATA_BASE);                @(negedge clk);
    wb_rd = 5'd4; wb_data = 64'd0;                         @(negedge clk);
    wb_en = 0;
    pc = 0; now = 0; ma_pending = 0; ma_retry = 0; ma_rd = 0; ma_addr = 0;
    while (!(pc == pc_end && !ma_pending && rcu_state == ST_PSEUDO_ENTRY &&
             !any_mshr())) begin
      @(negedge clk); now++;
      ex_valid = 0; ex_load = 0; ex_store = 0; ex_wen = 0; wb_en = 0; ma_load_issue = 0;
      miss_valid = 0; l2acq_valid = 0; resp_valid = 0; resp_wen = 0;
      // ---- memory side ----
      if (l2acq_pend) begin l2acq_valid = 1; l2acq_tag = l2acq_pend_tag; l2acq_pend = 0; end
      for (k = 0; k < MAX_MSHR; k++)
        if (mshr[k].v && mshr[k].due <= now) begin
          resp_valid = 1; resp_tag = mshr[k].tag; resp_rd = mshr[k].rd;
          resp_wen = mshr[k].rd != 0; resp_data = load_val(mshr[k].addr);
          fill(mshr[k].line, mshr[k].gain);
          mshr[k].v = 0;
          break;
        end
      free = 0;
      for (k = 0; k < MAX_MSHR; k++) if (mshr[k].v && mshr[k].l2m) free++;
      mshr_idle = mere_on ? 4'(L2_MSHR - free) : 4'd2;
      #1;
      // ---- MA stage of the previous load ----
      if (redirect_valid) begin
        // the end of a runahead squashes whatever runahead load is still at MA
        pc = int'((redirect_pc - PC_BASE) >> 2); hazard = 0; ma_pending = 0; ma_retry = 0;
      end else if (ma_pending) begin
        if (!ma_retry && ma_block) begin
          ma_pending = 0;
        end else if (!ma_retry && ma_rc_hit) begin
          wb_en = 1; wb_rd = ma_rd; wb_data = ma_rc_data; ma_pending = 0;
        end else if (ma_addr < DATA_BASE || (hw = l1_find(ma_addr[31:6])) >= 0) begin
          if (ma_addr >= DATA_BASE && l1_pf[ma_addr[31:6] % L1_SETS][hw] && !runahead) begin
            n_useful++; l1_pf[ma_addr[31:6] % L1_SETS][hw] = 0;
          end
          wb_en = 1; wb_rd = ma_rd; wb_data = load_val(ma_addr); ma_pending = 0;
        end else begin
          int in_flight = -1;
          int slot = -1;
          for (k = 0; k < MAX_MSHR; k++) if (mshr[k].v && mshr[k].line == ma_addr[31:6]) in_flight = k;
          for (k = l1_mshr - 1; k >= 0; k--) if (!mshr[k].v) slot = k;
          if (in_flight >= 0 && runahead) begin
            n_ra_merge++; ma_pending = 0;                 // already being prefetched
          end else if (in_flight >= 0) begin
            if (mshr[in_flight].gain) n_useful++;
            mshr[in_flight].rd = ma_rd; mshr[in_flight].addr = ma_addr; mshr[in_flight].gain = 0;
            miss_valid = 1; miss_tag = mshr[in_flight].tag; miss_addr = ma_addr; miss_rd = ma_rd;
            ma_load_issue = 1; ma_load_rd = ma_rd;
            if (mshr[in_flight].l2m) begin l2acq_pend = 1; l2acq_pend_tag = mshr[in_flight].tag; end
            ma_pending = 0;
          end else if (slot >= 0) begin
            bit l2m = !l2_hit(ma_addr[31:6]);
            while (tag_live(next_tag)) next_tag++;
            mshr[slot] = '{v: 1, line: ma_addr[31:6], tag: next_tag, rd: ma_rd, addr: ma_addr,
                           due: now + (l2m ? LAT_MEM : LAT_L2), l2m: l2m,
                           gain: runahead && rcu_state != ST_MERE_ENTER};
            n_gain += int'(mshr[slot].gain);
            n_l2miss += int'(l2m);
            miss_valid = 1; miss_tag = next_tag; miss_addr = ma_addr; miss_rd = ma_rd;
            ma_load_issue = 1; ma_load_rd = ma_rd;
            if (l2m) begin l2acq_pend = 1; l2acq_pend_tag = next_tag; end
            next_tag++;
            ma_pending = 0;
          end else begin
            ma_retry = 1;                                 // all L1 MSHRs busy
          end
        end
        if (!ma_pending) ma_retry = 0;
        hazard = 0;
      end else if (hold || pc == pc_end) begin
        hazard = 0;
      end else begin
        // ---- ID / EX ----
        if (hist) unique case (pc)
          0, 2, 5: begin id_rs1 = pc == 0 || pc == 5 ? 5'd1 : 5'd6; id_rs2 = 5'd0; end
          1:       begin id_rs1 = 5'd3; id_rs2 = 5'd5; end
          3:       begin id_rs1 = 5'd7; id_rs2 = 5'd0; end
          4:       begin id_rs1 = 5'd6; id_rs2 = 5'd7; end
          default: begin id_rs1 = 5'd1; id_rs2 = 5'd2; end
        endcase
        else unique case (pc)
          0, 2:    begin id_rs1 = pc == 0 ? 5'd1 : 5'd6; id_rs2 = 5'd0; end
          1:       begin id_rs1 = 5'd3; id_rs2 = 5'd5; end
          3:       begin id_rs1 = 5'd4; id_rs2 = 5'd7; end
          4:       begin id_rs1 = 5'd1; id_rs2 = 5'd0; end
          default: begin id_rs1 = 5'd1; id_rs2 = 5'd2; end
        endcase
        #1;
        a = id_rs1_data; b = id_rs2_data; busy_a = id_rs1_busy; busy_b = id_rs2_busy;
        if (busy_a || busy_b) begin
          hazard = 1; hazard_rs = busy_a ? id_rs1 : id_rs2; stall_pc = PC_BASE + 40'(pc * 4);
        end else begin
          hazard = 0;
          ex_valid = 1; ex_rs1 = id_rs1; ex_rs2 = id_rs2; ex_use_rs1 = 1; ex_use_rs2 = id_rs2 != 0;
          if (hist) unique case (pc)
            0, 2: begin
              ex_load = 1; ex_rd = pc == 0 ? 5'd5 : 5'd7; ex_addr = a[31:0];
              ma_pending = 1; ma_rd = ex_rd; ma_addr = a[31:0]; pc++;
            end
            1: begin ex_rd = 5'd6; ex_wen = 1; wb_en = 1; wb_rd = 5'd6; wb_data = a + b; pc++; end
            3: begin ex_rd = 5'd7; ex_wen = 1; wb_en = 1; wb_rd = 5'd7; wb_data = a + 64'd1; pc++; end
            4: begin
              // a runahead store goes to the runahead cache only
              ex_rd = 5'd0; ex_store = 1; ex_addr = a[31:0]; ex_sdata = b;
              if (!runahead) wmem[a[31:0]] = b;
              pc++;
            end
            5: begin ex_rd = 5'd1; ex_wen = 1; wb_en = 1; wb_rd = 5'd1; wb_data = a + 64'd8; pc++; end
            default: begin ex_rd = 5'd0; pc = (a != b) ? 0 : 7; end
          endcase
          else unique case (pc)
            0, 2: begin
              ex_load = 1; ex_rd = pc == 0 ? 5'd5 : 5'd7; ex_addr = a[31:0];
              ma_pending = 1; ma_rd = ex_rd; ma_addr = a[31:0]; pc++;
            end
            1: begin ex_rd = 5'd6; ex_wen = 1; wb_en = 1; wb_rd = 5'd6; wb_data = a + b; pc++; end
            3: begin ex_rd = 5'd4; ex_wen = 1; wb_en = 1; wb_rd = 5'd4; wb_data = a + b; pc++; end
            4: begin ex_rd = 5'd1; ex_wen = 1; wb_en = 1; wb_rd = 5'd1; wb_data = a + 64'd8; pc++; end
            default: begin ex_rd = 5'd0; pc = (a != b) ? 0 : 6; end
          endcase
        end
      end
      if (now > 64'd3_000_000) begin
        failures++;
        $display("run did not finish: pc=%0d state=%s busy=%h inv=%h hold=%b mshr=%b%b%b%b", pc, rcu_state.name(), sb_busy, inv_reg, hold,
                 mshr[0].v, mshr[1].v, mshr[2].v, mshr[3].v);
        break;
      end
    end
    cycles = now;
    @(negedge clk);
    id_rs1 = 5'd4; #1; sum = id_rs1_data;
  endtask

  longint c_base, c_mere;
  logic [63:0] s_base, s_mere, golden;
  int base_enter;
  localparam int D_KB [2] = '{24, 112};
  localparam int N_MSHR_SWEEP [3] = '{1, 2, 8};
  longint sweep_cyc [3], c_four;
  bit     hist = 0;                 // 0: gather loop, 1: key histogram
  int     gcnt [logic [31:0]];
  int     bad_base, bad_mere;
  function automatic int count_bad();
    int bad = 0;
    foreach (gcnt[a]) if (load_val(a) != hash64(a) + 64'(gcnt[a])) bad++;
    return bad + (wmem.size() != gcnt.size() ? 1 : 0);
  endfunction
  int     sweep_gain [3];

  initial begin
    for (int k = 0; k < 6; k++) ras_in[k] = '0;
    // D at both ends of the range of the original synthesised workloads:
    // 24 KB stays in the L2 after first touch, 112 KB does not
    foreach (D_KB[r]) begin
      d_bytes = D_KB[r] * 1024;
      golden = 0;
      for (int i = 0; i < ITER; i++)
        golden += load_val(DATA_BASE + 32'(load_val(IDX_BASE + 32'(i * 8))));
      run(0, c_base, s_base);
      base_enter = n_enter;
      $display("D = %0d KB", D_KB[r]);
      $display("  baseline : %0d cycles, %0d L2 misses, %0d runaheads", c_base, n_l2miss, n_enter);
      `CHECK(s_base == golden, "baseline sum")
      `CHECK(base_enter == 0, "no runahead in the baseline")
      run(1, c_mere, s_mere);
      $display("  MERE     : %0d cycles, %0d L2 misses, %0d runaheads, %0d gain-loads, %0d used, %0d Pseudo_Exit, %0d intercepted",
               c_mere, n_l2miss, n_enter, n_gain, n_useful, n_pexit, n_icpt);
      $display("  speed-up : %0d.%02d", c_base / c_mere, (c_base * 100 / c_mere) % 100);
      `CHECK(s_mere == golden, "sum with runahead")
      `CHECK(n_enter > 0, "runahead entered")
      `CHECK(n_gain > 0, "gain-loads issued")
      `CHECK(n_useful > 0, "prefetched lines used")
      `CHECK(c_mere <= c_base, "no slower with runahead")
    end
    // D-cache MSHR count, D = 112 KB (4 MSHRs was the run above)
    c_four = c_mere;
    foreach (N_MSHR_SWEEP[r]) begin
      l1_mshr = N_MSHR_SWEEP[r];
      run(0, c_base, s_base);
      run(1, c_mere, s_mere);
      $display("%0d D-cache MSHRs: %0d / %0d cycles, %0d gain-loads, speed-up %0d.%02d", l1_mshr, c_base, c_mere,
               n_gain, c_base / c_mere, (c_base * 100 / c_mere) % 100);
      `CHECK(s_base == golden && s_mere == golden, $sformatf("sums with %0d MSHRs", l1_mshr))
      sweep_cyc[r] = c_mere;
      sweep_gain[r] = n_gain;
    end
    // a runahead can only prefetch into MSHRs the stall load leaves free
    `CHECK(c_base * 10 < sweep_cyc[0] * 12, "one MSHR: little to gain (under 1.2x)")
    `CHECK(sweep_cyc[0] > sweep_cyc[1] && sweep_cyc[1] > c_four && c_four > sweep_cyc[2],
           "more MSHRs, fewer cycles")
    // key histogram, D = 112 KB, 4 MSHRs: cnt[key[i]]++ with runahead stores
    hist = 1; l1_mshr = 4;
    gcnt.delete();
    for (int i = 0; i < ITER; i++) begin
      logic [31:0] ka;
      ka = DATA_BASE + 32'(load_val(IDX_BASE + 32'(i * 8)));
      if (gcnt.exists(ka)) gcnt[ka]++; else gcnt[ka] = 1;
    end
    run(0, c_base, s_base); bad_base = count_bad();
    run(1, c_mere, s_mere); bad_mere = count_bad();
    $display("histogram: %0d / %0d cycles, %0d runaheads, %0d gain-loads, %0d R$ hits, %0d blocked, speed-up %0d.%02d",
             c_base, c_mere, n_enter, n_gain, n_rc_hit, n_block, c_base / c_mere, (c_base * 100 / c_mere) % 100);
    `CHECK(bad_base == 0, "histogram counters without runahead")
    `CHECK(bad_mere == 0, "histogram counters with runahead")
    `CHECK(n_enter > 0 && n_gain > 0, "histogram: runahead entered and prefetched")
    `CHECK(c_mere <= c_base, "histogram: no slower with runahead")
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
