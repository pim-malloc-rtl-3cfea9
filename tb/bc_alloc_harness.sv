// bc_alloc_harness: a buddy cache of ENTRIES entries driven by a software
// model of the two-level allocator it serves, running one workload.
//
// Testbench-only helper (not synthesizable). It models what runs on the PIM
// core: per-thread thread caches in front of a shared buddy allocator.
//  - Thread cache (frontend): for each thread, eight size classes 16 B .. 2 KB
//    (16 << c). Each class owns a list of 4 KB blocks taken from the buddy
//    allocator, with one bit per sub-block (1 = unused). A request of at most
//    2 KB takes the first free sub-block of its class (a frontend hit) or, if
//    none is left, first takes a new 4 KB block from the buddy allocator (a
//    frontend miss). A block whose sub-blocks are all free again goes back to
//    the buddy allocator. At start every list is given one 4 KB block.
//  - Requests above 2 KB bypass the thread cache and go to the buddy allocator.
//  - Buddy allocator (backend): 32 MB heap, 4 KB minimum block, 13 levels
//    below the root, 2-bit node states packed 16 per 32-bit word in a 4 KB
//    metadata area of a DRAM bank model. Every metadata read goes through the
//    buddy cache (lookup_bc; read_bc on a hit; on a miss fetch from DRAM,
//    write_bc into the victim the lookup named, read_bc). Updates are written
//    through to DRAM and into the cached entry.
// Each returned block is checked for size, alignment and overlap, each value
// read from the cache against the DRAM model, each victim against a reference
// LRU order, and each cache result for its one-cycle latency.
//
// WORKLOAD selects what runs once rst_n is high:
//   0 microbenchmark: THREADS threads x 128 requests of SIZE bytes
//   1 dynamic graph update, array of linked lists: 256 B requests
//   2 dynamic graph update, variable-sized arrays: arrays doubling 64 B .. 32 KB,
//     the old array freed after each move
//   3 LLM attention: 512 B KV-cache blocks appended per request
// Results come out as counters; done rises when the workload is over.
module bc_alloc_harness
  import bc_pkg::*;
#(
  parameter int unsigned ENTRIES  = 16,
  parameter int unsigned WORKLOAD = 0,
  parameter int unsigned THREADS  = 16,
  parameter int unsigned SIZE     = 4096,
  parameter int unsigned SEED     = 1
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   done,
  output int     checks,
  output int     failures,
  output longint n_hit,
  output longint n_miss,
  output longint n_evict,
  output longint n_mallocs,
  output longint n_front_hit,
  output longint n_front_miss,
  output longint n_bypass,
  output longint n_block_return,
  output longint n_dram_bytes
);

  localparam int unsigned DEPTH     = 13;
  localparam int unsigned NODES     = 1 << (DEPTH + 1);
  localparam int unsigned WORDS     = NODES / 16;
  localparam int unsigned PAGES     = 1 << DEPTH;
  localparam int unsigned CLASSES   = 8;
  localparam logic [31:0] META_BASE = 32'h0800_0000;
  localparam logic [31:0] HEAP_BASE = 32'h0A00_0000;
  localparam logic [1:0]  ST_FREE = 2'd0, ST_PART = 2'd1, ST_FULL = 2'd2;

  logic        req_valid;
  bc_req_t     req;
  logic        rsp_valid;
  logic [31:0] rsp_result;

  buddy_cache #(.ENTRIES(ENTRIES)) u_bc (
    .clk, .rst_n, .req_valid, .req, .rsp_valid, .rsp_result
  );

  logic [31:0] mram_meta [WORDS];
  int          page_owner [PAGES];    // 0 free, -1 thread-cache block, else buddy allocation id
  int          lru_order[$];
  bit          entry_used [ENTRIES];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL [%m]: %s", what);
    end
  endtask

  function automatic void lru_reset();
    lru_order.delete();
    for (int i = ENTRIES - 1; i >= 0; i--) lru_order.push_back(i);
    for (int i = 0; i < ENTRIES; i++) entry_used[i] = 1'b0;
  endfunction

  function automatic void lru_touch(int j);
    foreach (lru_order[k]) if (lru_order[k] == j) begin lru_order.delete(k); break; end
    lru_order.push_front(j);
  endfunction

  // ---------------- buddy-cache instructions ----------------
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

  task automatic get_word(input int w, output logic [31:0] val);
    logic [31:0] r;
    logic [31:0] v;
    logic [31:0] dummy;
    bc(BC_LOOKUP, 0, word_addr(w), '0, r);
    if (!r[31]) begin
      n_hit++;
      lru_touch(int'(r));
      bc(BC_READ, int'(r), '0, '0, v);
    end else begin
      int victim;
      n_miss++;
      victim = int'(~r);
      check(victim == lru_order[ENTRIES-1],
            $sformatf("victim %0d is the LRU entry %0d", victim, lru_order[ENTRIES-1]));
      lru_touch(victim);
      if (entry_used[victim]) n_evict++;
      entry_used[victim] = 1'b1;
      n_dram_bytes += 4;
      bc(BC_WRITE, victim, word_addr(w), mram_meta[w], dummy);
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

  function automatic int node_depth(int n);
    int d = 0;
    while ((n >> (d + 1)) != 0) d++;
    return d;
  endfunction

  function automatic int node_first_page(int n);
    int d = node_depth(n);
    return (n - (1 << d)) << (DEPTH - d);
  endfunction

  int alloc_id = 0;

  // Buddy allocation of 4 KB << lvl; returns the first page, -1 when out of memory.
  task automatic buddy_alloc(input int lvl, input int owner, output int pg);
    int d, node;
    int stack_n[$];
    int stack_d[$];
    logic [1:0] st;
    d = DEPTH - lvl;
    node = 0;
    stack_n.push_back(1);
    stack_d.push_back(0);
    while (stack_n.size() > 0 && node == 0) begin
      int n, k;
      n = stack_n.pop_back();
      k = stack_d.pop_back();
      get_node(n, st);
      if (st == ST_FULL) continue;
      if (k == d) begin
        if (st == ST_FREE) node = n;
        continue;
      end
      if (st == ST_FREE) begin
        node = n << (d - k);
        continue;
      end
      stack_n.push_back(2 * n + 1); stack_d.push_back(k + 1);
      stack_n.push_back(2 * n);     stack_d.push_back(k + 1);
    end
    pg = -1;
    if (node != 0) begin
      set_node(node, ST_FULL);
      update_up(node);
      pg = node_first_page(node);
      check(pg % (1 << lvl) == 0 && pg + (1 << lvl) <= PAGES, "buddy block aligned and in the heap");
      for (int i = pg; i < pg + (1 << lvl); i++) begin
        check(page_owner[i] == 0, $sformatf("page %0d given out twice", i));
        page_owner[i] = owner;
      end
    end
  endtask

  task automatic buddy_free(input int pg, input int lvl);
    int n;
    logic [1:0] st;
    for (int i = pg; i < pg + (1 << lvl); i++) page_owner[i] = 0;
    n = (1 << DEPTH) + pg;
    get_node(n, st);
    while (st == ST_FREE && n > 1) begin
      n = n >> 1;
      get_node(n, st);
    end
    check(st == ST_FULL, $sformatf("free of page %0d finds an allocated node", pg));
    check(node_depth(n) == DEPTH - lvl, $sformatf("free of page %0d finds a block of the right size", pg));
    set_node(n, ST_FREE);
    update_up(n);
  endtask

  // ---------------- thread caches ----------------
  typedef struct {
    int           page;
    logic [255:0] unused;   // one bit per sub-block, 1 = unused
  } tc_block_t;

  tc_block_t tc [24][CLASSES][$];
  int        live_size [logic [31:0]];  // live allocations: address -> bytes

  function automatic int class_of(int size);
    for (int c = 0; c < CLASSES; c++) if ((16 << c) >= size) return c;
    return -1;
  endfunction

  function automatic int lvl_of(int size);
    for (int l = 0; l <= DEPTH; l++) if ((4096 << l) >= size) return l;
    return -1;
  endfunction

  function automatic logic [255:0] all_unused(int c);
    logic [255:0] m = '0;
    for (int i = 0; i < (4096 >> (4 + c)); i++) m[i] = 1'b1;
    return m;
  endfunction

  task automatic tc_add_block(input int t, input int c, output bit ok);
    int pg;
    tc_block_t b;
    buddy_alloc(0, -1, pg);
    ok = (pg >= 0);
    if (ok) begin
      b.page = pg;
      b.unused = all_unused(c);
      tc[t][c].push_back(b);
    end
  endtask

  task automatic pim_malloc(input int t, input int size, output logic [31:0] addr);
    addr = '0;
    n_mallocs++;
    if (size > 2048) begin
      int pg;
      n_bypass++;
      alloc_id++;
      buddy_alloc(lvl_of(size), alloc_id, pg);
      if (pg >= 0) addr = HEAP_BASE + 32'(pg) * 32'd4096;
    end else begin
      int c, bi, si;
      bit ok;
      c = class_of(size);
      bi = -1;
      foreach (tc[t][c][k]) if (tc[t][c][k].unused != '0) begin bi = k; break; end
      if (bi < 0) begin
        n_front_miss++;
        tc_add_block(t, c, ok);
        if (ok) bi = tc[t][c].size() - 1;
      end else begin
        n_front_hit++;
      end
      if (bi >= 0) begin
        si = 0;
        while (!tc[t][c][bi].unused[si]) si++;
        tc[t][c][bi].unused[si] = 1'b0;
        addr = HEAP_BASE + 32'(tc[t][c][bi].page) * 32'd4096 + 32'(si * (16 << c));
      end
    end
    if (addr != 0) begin
      check(!live_size.exists(addr), $sformatf("address %h handed out twice", addr));
      live_size[addr] = size;
    end
  endtask

  task automatic pim_free(input int t, input logic [31:0] addr);
    int size;
    check(live_size.exists(addr), $sformatf("free of a live address %h", addr));
    size = live_size[addr];
    live_size.delete(addr);
    if (size > 2048) begin
      buddy_free(int'((addr - HEAP_BASE) >> 12), lvl_of(size));
    end else begin
      int c, pg, si, bi;
      c = class_of(size);
      pg = int'((addr - HEAP_BASE) >> 12);
      si = int'((addr - HEAP_BASE) & 32'hFFF) >> (4 + c);
      bi = -1;
      foreach (tc[t][c][k]) if (tc[t][c][k].page == pg) bi = k;
      check(bi >= 0, "freed sub-block belongs to the thread's cache");
      if (bi >= 0) begin
        tc[t][c][bi].unused[si] = 1'b1;
        if (tc[t][c][bi].unused == all_unused(c)) begin
          n_block_return++;
          tc[t][c].delete(bi);
          buddy_free(pg, 0);
        end
      end
    end
  endtask

  task automatic init_allocator(input int nthreads);
    logic [31:0] r;
    bit ok;
    bc(BC_INIT, 0, '0, '0, r);
    lru_reset();
    for (int t = 0; t < nthreads; t++)
      for (int c = 0; c < CLASSES; c++) tc_add_block(t, c, ok);
  endtask

  // ---------------- workloads ----------------
  task automatic run_microbenchmark();
    logic [31:0] a;
    init_allocator(THREADS);
    // The shared allocator serves threads one at a time; round robin order.
    for (int k = 0; k < 128; k++)
      for (int t = 0; t < THREADS; t++) begin
        pim_malloc(t, SIZE, a);
        check(a != 0, "microbenchmark allocation succeeds");
      end
  endtask

  task automatic run_linked_lists();
    logic [31:0] a;
    init_allocator(THREADS);
    for (int k = 0; k < 400; k++)
      for (int t = 0; t < THREADS; t++) begin
        pim_malloc(t, 256, a);
        check(a != 0, "list element allocation succeeds");
      end
  endtask

  task automatic run_variable_arrays();
    // 64 vertices per thread; each insertion appends an edge (4 B) to a
    // vertex, half of them to a hub vertex so that its array grows to 32 KB;
    // when an array is full it moves to one twice the size.
    localparam int V = 64;
    int          deg [24][V];
    int          cap [24][V];
    logic [31:0] arr [24][V];
    logic [31:0] a;
    init_allocator(THREADS);
    for (int t = 0; t < THREADS; t++)
      for (int v = 0; v < V; v++) begin deg[t][v] = 0; cap[t][v] = 0; arr[t][v] = '0; end
    for (int k = 0; k < 16500; k++)
      for (int t = 0; t < THREADS; t++) begin
        int v;
        v = ($urandom % 2 == 0) ? 0 : int'($urandom % V);  // vertex 0 is a hub
        if (deg[t][v] * 4 >= cap[t][v] && cap[t][v] < 32768) begin
          int nc;
          nc = (cap[t][v] == 0) ? 64 : 2 * cap[t][v];
          pim_malloc(t, nc, a);
          check(a != 0, "array allocation succeeds");
          if (cap[t][v] != 0) pim_free(t, arr[t][v]);
          arr[t][v] = a;
          cap[t][v] = nc;
        end
        if (deg[t][v] * 4 < cap[t][v]) deg[t][v]++;
      end
  endtask

  task automatic run_attention();
    // Each thread serves requests whose KV cache grows token by token; a new
    // 512 B block is taken when the current one is full (2 tokens per block
    // in this per-core slice), and a finished request frees its blocks.
    logic [31:0] blocks[24][$];
    logic [31:0] a;
    init_allocator(THREADS);
    for (int r = 0; r < 4; r++) begin
      for (int tok = 0; tok < 128 + 256; tok += 2)
        for (int t = 0; t < THREADS; t++) begin
          pim_malloc(t, 512, a);
          check(a != 0, "KV block allocation succeeds");
          blocks[t].push_back(a);
        end
      for (int t = 0; t < THREADS; t++)
        while (blocks[t].size() > 0) pim_free(t, blocks[t].pop_front());
    end
  endtask

  initial begin
    void'($urandom(SEED));
    done = 1'b0;
    checks = 0; failures = 0;
    n_hit = 0; n_miss = 0; n_evict = 0; n_mallocs = 0; n_front_hit = 0; n_front_miss = 0;
    n_bypass = 0; n_block_return = 0; n_dram_bytes = 0;
    req_valid = 1'b0;
    req = '0;
    for (int w = 0; w < WORDS; w++) mram_meta[w] = '0;
    for (int i = 0; i < PAGES; i++) page_owner[i] = 0;
    lru_reset();
    @(posedge rst_n);
    case (WORKLOAD)
      0: run_microbenchmark();
      1: run_linked_lists();
      2: run_variable_arrays();
      3: run_attention();
      default: check(1'b0, "unknown workload");
    endcase
    done = 1'b1;
  end

endmodule
