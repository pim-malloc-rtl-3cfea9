// tb_buddy_cache_e2e: the buddy cache at its default size (16 entries) serving
// a buddy allocator, end to end.
//
// The testbench plays the software side of a PIM core. It keeps the buddy
// tree of a 32 MB heap with a 4 KB minimum block (13 levels below the root,
// 16383 nodes) as 2-bit node states (0 free, 1 partially allocated, 2 fully
// allocated), packed 16 per 32-bit word into a 4 KB metadata area of a DRAM
// bank model. Every metadata read of the allocator goes through the cache as
// getMetadata() does: lookup_bc; on a hit read_bc; on a miss fetch the word
// from the DRAM model, write_bc it into the victim entry the lookup returned,
// then read_bc. Metadata updates are written through to DRAM and, when the
// word is cached, into its entry with write_bc.
//
// Phases:
//   1. the microbenchmark of the evaluation: 16 threads each ask for 128
//      blocks of 4 KB (the shared allocator serves them one at a time);
//   2. all 2048 blocks are freed again, and the tree must be all free;
//   3. random allocations and frees of 4 KB .. 256 KB until the heap is
//      exhausted at least once.
// Every value read from the cache is compared with the DRAM model, every
// block is checked for alignment, range and overlap against a page map, and
// every buddy-cache result is checked to arrive one cycle after issue. The
// testbench counts hits, misses, fills of empty entries, evictions of valid
// entries, init_bc, and allocation failures, and fails if one never happens.
// The hit rate of phase 1 is printed (the paper reports 99% for this
// microbenchmark) and must be at least 90%.
module tb_buddy_cache_e2e;
  import bc_pkg::*;

  localparam int unsigned N          = 16;          // default entry count of the cache
  localparam int unsigned DEPTH      = 13;          // log2(32 MB / 4 KB)
  localparam int unsigned NODES      = 1 << (DEPTH + 1);
  localparam int unsigned WORDS      = NODES / 16;  // 1024 words = 4 KB of metadata
  localparam int unsigned PAGES      = 1 << DEPTH;  // 4 KB pages in the heap
  localparam logic [31:0] META_BASE  = 32'h0800_0000;  // start of MRAM in the DPU map
  localparam logic [31:0] HEAP_BASE  = 32'h0A00_0000;  // heap placed 32 MB further on
  localparam logic [1:0]  ST_FREE = 2'd0, ST_PART = 2'd1, ST_FULL = 2'd2;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        req_valid = 1'b0;
  bc_req_t     req = '0;
  logic        rsp_valid;
  logic [31:0] rsp_result;

  buddy_cache dut (.*);   // default parameters

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint n_hit = 0, n_miss = 0, n_fill_empty = 0, n_evict = 0, n_init = 0, n_alloc_fail = 0;
  longint n_bytes_dram = 0;
  bit     entry_used [N];
  int     lru_order[$];   // reference LRU order, most recent first

  function automatic void lru_reset();
    lru_order.delete();
    for (int i = N - 1; i >= 0; i--) lru_order.push_back(i);
  endfunction

  function automatic void lru_touch(int j);
    foreach (lru_order[k]) if (lru_order[k] == j) begin lru_order.delete(k); break; end
    lru_order.push_front(j);
  endfunction

  logic [31:0] mram_meta [WORDS];   // DRAM model of the metadata area
  int          page_owner [PAGES];  // 0 free, else allocation id

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // One buddy-cache instruction; returns its result one cycle later.
  task automatic bc(input bc_op_e op, input int idx, input logic [31:0] addr,
                    input logic [31:0] data, output logic [31:0] result);
    @(negedge clk);
    req_valid = 1'b1;
    req.op = op; req.idx = 32'(idx); req.addr = addr; req.data = data;
    @(negedge clk);
    req_valid = 1'b0;
    check(rsp_valid, "result one cycle after the instruction");
    result = rsp_result;
  endtask

  function automatic logic [31:0] word_addr(int w);
    return META_BASE + 32'(4 * w);
  endfunction

  // getMetadata(): the metadata word holding node n, through the cache.
  task automatic get_word(input int w, output logic [31:0] val);
    logic [31:0] r;
    logic [31:0] v;
    bc(BC_LOOKUP, 0, word_addr(w), '0, r);
    if (!r[31]) begin
      n_hit++;
      lru_touch(int'(r));
      bc(BC_READ, int'(r), '0, '0, v);
    end else begin
      int victim;
      logic [31:0] old;
      n_miss++;
      victim = int'(~r);
      check(victim == lru_order[N-1], $sformatf("victim %0d is the LRU entry %0d", victim, lru_order[N-1]));
      lru_touch(victim);
      n_bytes_dram += 4;
      if (entry_used[victim]) n_evict++;
      else n_fill_empty++;
      entry_used[victim] = 1'b1;
      bc(BC_WRITE, victim, word_addr(w), mram_meta[w], old);
      bc(BC_READ, victim, '0, '0, v);
    end
    check(v == mram_meta[w], $sformatf("metadata word %0d: cache %h dram %h", w, v, mram_meta[w]));
    val = v;
  endtask

  task automatic get_node(input int n, output logic [1:0] st);
    logic [31:0] v;
    get_word(n >> 4, v);
    st = v[2 * (n & 15) +: 2];
  endtask

  // Write-through update of one node state.
  task automatic set_node(input int n, input logic [1:0] st);
    int w;
    logic [31:0] r;
    logic [31:0] dummy;
    w = n >> 4;
    mram_meta[w][2 * (n & 15) +: 2] = st;
    bc(BC_LOOKUP, 0, word_addr(w), '0, r);
    if (!r[31]) begin
      n_hit++;
      lru_touch(int'(r));
      bc(BC_WRITE, int'(r), word_addr(w), mram_meta[w], dummy);
    end
  endtask

  // Recompute the states of the ancestors of node n.
  task automatic update_up(input int n);
    logic [1:0] l, r, st;
    int p;
    p = n >> 1;
    while (p >= 1) begin
      get_node(2 * p, l);
      get_node(2 * p + 1, r);
      if (l == ST_FULL && r == ST_FULL) st = ST_FULL;
      else if (l == ST_FREE && r == ST_FREE) st = ST_FREE;
      else st = ST_PART;
      set_node(p, st);
      p = p >> 1;
    end
  endtask

  // Allocate a block of 4 KB << lvl; returns node number, 0 if out of memory.
  task automatic buddy_alloc(input int lvl, output int node);
    int d;
    int stack_n[$];
    int stack_d[$];
    logic [1:0] st;
    d = DEPTH - lvl;
    node = 0;
    stack_n.push_back(1);
    stack_d.push_back(0);
    while (stack_n.size() > 0 && node == 0) begin
      int n;
      int k;
      n = stack_n.pop_back();
      k = stack_d.pop_back();
      get_node(n, st);
      if (st == ST_FULL) continue;
      if (k == d) begin
        if (st == ST_FREE) node = n;
        continue;
      end
      if (st == ST_FREE) begin
        node = n << (d - k);   // a free subtree: its leftmost block of the size
        continue;
      end
      stack_n.push_back(2 * n + 1); stack_d.push_back(k + 1);
      stack_n.push_back(2 * n);     stack_d.push_back(k + 1);
    end
    if (node != 0) begin
      set_node(node, ST_FULL);
      update_up(node);
    end
  endtask

  // Free the block that starts at page pg: the lowest non-free node above its leaf.
  task automatic buddy_free(input int pg);
    int n;
    logic [1:0] st;
    n = (1 << DEPTH) + pg;
    get_node(n, st);
    while (st == ST_FREE && n > 1) begin
      n = n >> 1;
      get_node(n, st);
    end
    check(st == ST_FULL, $sformatf("free of page %0d finds an allocated node", pg));
    set_node(n, ST_FREE);
    update_up(n);
  endtask

  function automatic int node_depth(int n);
    int d = 0;
    while ((n >> (d + 1)) != 0) d++;
    return d;
  endfunction

  // Page range of node n and its address.
  function automatic int node_first_page(int n);
    int d = node_depth(n);
    return (n - (1 << d)) << (DEPTH - d);
  endfunction

  int alloc_id = 0;

  task automatic claim(input int n, input int lvl);
    int pg, cnt;
    logic [31:0] addr;
    pg = node_first_page(n);
    cnt = 1 << lvl;
    addr = HEAP_BASE + 32'(pg) * 32'd4096;
    check(node_depth(n) == DEPTH - lvl, "block of the requested size");
    check(pg % cnt == 0 && pg + cnt <= PAGES, $sformatf("block %h aligned and inside the heap", addr));
    alloc_id++;
    for (int i = pg; i < pg + cnt; i++) begin
      check(page_owner[i] == 0, $sformatf("page %0d given out twice", i));
      page_owner[i] = alloc_id;
    end
  endtask

  task automatic release_block(input int pg, input int lvl);
    for (int i = pg; i < pg + (1 << lvl); i++) page_owner[i] = 0;
    buddy_free(pg);
  endtask

  int  p1_pg[$];
  int  live_pg[$];
  int  live_lvl[$];

  initial begin
    #500_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r;
    int n;
    longint h0, m0;
    for (int w = 0; w < WORDS; w++) mram_meta[w] = '0;
    for (int i = 0; i < PAGES; i++) page_owner[i] = 0;
    for (int i = 0; i < N; i++) entry_used[i] = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- phase 1: 16 threads x 128 allocations of 4 KB ----
    bc(BC_INIT, 0, '0, '0, r); n_init++;
    for (int i = 0; i < N; i++) entry_used[i] = 1'b0;
    lru_reset();
    for (int t = 0; t < 16; t++) begin
      for (int k = 0; k < 128; k++) begin
        buddy_alloc(0, n);
        check(n != 0, "4 KB allocation succeeds");
        if (n != 0) begin claim(n, 0); p1_pg.push_back(node_first_page(n)); end
      end
    end
    begin
      real rate;
      rate = real'(n_hit) / real'(n_hit + n_miss);
      $display("phase 1: %0d lookups, hit rate %0.2f%%, %0d B metadata fetched (%0.2f B per allocation)",
               n_hit + n_miss, 100.0 * rate, n_bytes_dram, real'(n_bytes_dram) / 2048.0);
      check(rate >= 0.90, "phase 1 hit rate at least 90%");
    end

    // ---- phase 2: free everything, tree must be clean ----
    foreach (p1_pg[i]) release_block(p1_pg[i], 0);
    begin
      bit clean = 1'b1;
      for (int w = 0; w < WORDS; w++) if (mram_meta[w] != 0) clean = 1'b0;
      check(clean, "tree all free after freeing every block");
      for (int i = 0; i < PAGES; i++) if (page_owner[i] != 0) clean = 1'b0;
      check(clean, "page map empty");
    end

    // ---- phase 3: random sizes 4 KB .. 256 KB, fill to exhaustion ----
    bc(BC_INIT, 0, '0, '0, r); n_init++;
    for (int i = 0; i < N; i++) entry_used[i] = 1'b0;
    lru_reset();
    h0 = n_hit; m0 = n_miss;
    for (int s = 0; s < 5000 && n_alloc_fail < 3; s++) begin
      int lvl;
      lvl = int'($urandom % 7);          // 4 KB << 0..6 = 4 KB .. 256 KB
      if (live_pg.size() > 0 && ($urandom % 8 == 0)) begin
        int j;
        j = int'($urandom % live_pg.size());
        release_block(live_pg[j], live_lvl[j]);
        live_pg.delete(j); live_lvl.delete(j);
      end else begin
        buddy_alloc(lvl, n);
        if (n == 0) begin
          int freepages = 0;
          n_alloc_fail++;
          // A failure is only right if no aligned free run of that size exists.
          for (int b = 0; b < PAGES; b += (1 << lvl)) begin
            bit all_free = 1'b1;
            for (int i = b; i < b + (1 << lvl); i++) if (page_owner[i] != 0) all_free = 1'b0;
            if (all_free) freepages++;
          end
          check(freepages == 0, $sformatf("failed %0d KB allocation while an aligned free block exists", 4 << lvl));
        end else begin
          claim(n, lvl);
          live_pg.push_back(node_first_page(n)); live_lvl.push_back(lvl);
        end
      end
    end
    $display("phase 3: %0d blocks live, %0d failed allocations, hit rate %0.2f%%", live_pg.size(),
             n_alloc_fail, 100.0 * real'(n_hit - h0) / real'(n_hit - h0 + n_miss - m0));
    while (live_pg.size() > 0) begin
      release_block(live_pg[0], live_lvl[0]);
      live_pg.delete(0); live_lvl.delete(0);
    end
    begin
      bit clean = 1'b1;
      for (int w = 0; w < WORDS; w++) if (mram_meta[w] != 0) clean = 1'b0;
      check(clean, "tree all free at the end");
    end

    // ---- mechanisms seen ----
    $display("mechanisms: hits=%0d misses=%0d fills_of_empty=%0d evictions=%0d init_bc=%0d alloc_failures=%0d",
             n_hit, n_miss, n_fill_empty, n_evict, n_init, n_alloc_fail);
    check(n_hit > 0, "buddy-cache hit happened");
    check(n_miss > 0, "buddy-cache miss happened");
    check(n_fill_empty > 0, "fill of an empty entry happened");
    check(n_evict > 0, "eviction of the LRU entry happened");
    check(n_init > 0, "init_bc happened");
    check(n_alloc_fail > 0, "allocation failure (heap exhausted) happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
