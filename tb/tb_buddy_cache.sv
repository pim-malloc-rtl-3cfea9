// tb_buddy_cache: instruction-level test of the buddy cache.
//
// Issues init_bc, lookup_bc, read_bc and write_bc and compares every result
// with a reference model (entry arrays plus a most-recent-first list for the
// LRU order) kept by the testbench. It also checks the timing: each result
// must arrive exactly one cycle after its instruction, with rsp_valid low in
// cycles that follow an idle one. Directed part: the paper's miss path (lookup
// miss -> write_bc into the named victim -> read_bc), a hit in every entry,
// eviction of the LRU entry when all are valid, read_bc leaving the order
// alone, init_bc, out-of-range indices. Random part: back-to-back instructions
// with idle gaps over a small address pool, so hits, misses and evictions mix.
module tb_buddy_cache;
  import bc_pkg::*;

  localparam int unsigned N  = 16;
  localparam int unsigned IW = $clog2(N);

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        req_valid = 1'b0;
  bc_req_t     req = '0;
  logic        rsp_valid;
  logic [31:0] rsp_result;

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_evict = 0;

  buddy_cache dut (.*);

  always #5 clk = ~clk;

  // ---------------- reference model ----------------
  logic        m_valid [N];
  logic [31:0] m_tag   [N];
  logic [31:0] m_data  [N];
  int          order[$];   // most recently used first

  function automatic void m_init();
    for (int i = 0; i < N; i++) m_valid[i] = 1'b0;
    order.delete();
    for (int i = N - 1; i >= 0; i--) order.push_back(i);
  endfunction

  function automatic void m_touch(int j);
    foreach (order[k]) if (order[k] == j) begin order.delete(k); break; end
    order.push_front(j);
  endfunction

  function automatic int m_find(logic [31:0] a);
    for (int i = 0; i < N; i++) if (m_valid[i] && m_tag[i] == a) return i;
    return -1;
  endfunction

  // Applies one instruction to the model and returns its expected result.
  function automatic logic [31:0] m_exec(bc_req_t r);
    int h;
    case (r.op)
      BC_INIT: begin m_init(); return 32'h0; end
      BC_LOOKUP: begin
        h = m_find(r.addr);
        if (h >= 0) begin m_touch(h); return 32'(h); end
        return ~32'(order[N-1]);
      end
      BC_READ: return (r.idx < N && m_valid[r.idx]) ? m_data[r.idx] : 32'h0;
      BC_WRITE: begin
        if (r.idx < N) begin
          m_valid[r.idx] = 1'b1; m_tag[r.idx] = r.addr; m_data[r.idx] = r.data;
          m_touch(int'(r.idx));
        end
        return 32'h0;
      end
      default: return 32'h0;
    endcase
  endfunction

  // ---------------- driver and checker ----------------
  logic        exp_pending = 1'b0;
  logic [31:0] exp_result;
  bc_req_t     last_req;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Drives one cycle: an instruction (valid) or an idle cycle.
  // Everything is driven on the falling edge and checked there, one cycle
  // after the rising edge that sampled the instruction.
  task automatic cycle(input bit valid, input bc_req_t r);
    @(negedge clk);
    // the rising edge just gone produced the response to the previous cycle
    check(rsp_valid == exp_pending, $sformatf("rsp_valid=%0d exp %0d", rsp_valid, exp_pending));
    if (exp_pending)
      check(rsp_result == exp_result,
            $sformatf("op %s idx=%0d addr=%h: result %h exp %h", last_req.op.name(), last_req.idx,
                      last_req.addr, rsp_result, exp_result));
    req_valid = valid;
    req = r;
    exp_pending = valid;
    last_req = r;
    if (valid) begin
      if (r.op == BC_LOOKUP) begin
        if (m_find(r.addr) >= 0) n_hit++;
        else n_miss++;
      end
      if (r.op == BC_WRITE && r.idx < N && m_valid[r.idx]) n_evict++;
      exp_result = m_exec(r);
    end
  endtask

  function automatic bc_req_t mk(bc_op_e op, int idx, logic [31:0] addr, logic [31:0] data);
    bc_req_t r;
    r.op = op; r.idx = 32'(idx); r.addr = addr; r.data = data;
    return r;
  endfunction

  // The paper's miss path done the way software would: lookup, on a miss
  // write the fetched word into the victim, then read it back.
  task automatic get_metadata(input logic [31:0] addr, input logic [31:0] dram_word);
    int h;
    int v;
    h = m_find(addr);
    cycle(1'b1, mk(BC_LOOKUP, 0, addr, '0));
    if (h >= 0) begin
      cycle(1'b1, mk(BC_READ, h, '0, '0));
    end else begin
      v = order[N-1];
      cycle(1'b0, '0);  // the miss result is used by the next instruction
      check(rsp_result == ~32'(v), "miss returns the victim");
      cycle(1'b1, mk(BC_WRITE, v, addr, dram_word));
      cycle(1'b1, mk(BC_READ, v, '0, '0));
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_init();
    for (int i = 0; i < N; i++) begin m_tag[i] = '0; m_data[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cycle(1'b1, mk(BC_INIT, 0, '0, '0));
    // Cold: every word misses and fills entries 0..N-1 in order.
    for (int k = 0; k < N; k++) get_metadata(32'h0800_0000 + 32'(4 * k), 32'h0111_0000 + 32'(k));
    // Warm: every word hits.
    for (int k = N - 1; k >= 0; k--) get_metadata(32'h0800_0000 + 32'(4 * k), '0);
    // read_bc does not change the order: read entry 0 (the LRU) then miss.
    cycle(1'b1, mk(BC_READ, order[N-1], '0, '0));
    get_metadata(32'h0800_0400, 32'hDEAD_BEEF);
    get_metadata(32'h0800_0404, 32'h0000_0001);
    // Out-of-range index operands.
    cycle(1'b1, mk(BC_READ, N, '0, '0));
    cycle(1'b1, mk(BC_WRITE, N + 3, 32'h0800_0800, 32'h5));
    cycle(1'b1, mk(BC_LOOKUP, 0, 32'h0800_0800, '0));
    // init_bc empties the cache.
    cycle(1'b1, mk(BC_INIT, 0, '0, '0));
    cycle(1'b1, mk(BC_LOOKUP, 0, 32'h0800_0400, '0));
    cycle(1'b1, mk(BC_READ, 3, '0, '0));
    cycle(1'b0, '0);
    cycle(1'b0, '0);
    // Random mix over 24 words, back to back with occasional idle cycles.
    for (int n = 0; n < 20000; n++) begin
      int sel;
      logic [31:0] a;
      bc_req_t r;
      sel = int'($urandom % 100);
      a = 32'h0800_0000 + 32'(4 * ($urandom % 24));
      if (sel < 5) cycle(1'b0, '0);
      else if (sel < 6) cycle(1'b1, mk(BC_INIT, 0, '0, '0));
      else if (sel < 50) cycle(1'b1, mk(BC_LOOKUP, 0, a, '0));
      else if (sel < 75) cycle(1'b1, mk(BC_READ, int'($urandom % (N + 2)), '0, '0));
      else begin
        // keep tags unique, as software does: refill only a word not present
        int h;
        int idx;
        h = m_find(a);
        idx = ($urandom % 2 == 0) ? order[N-1] : int'($urandom % N);
        if (h < 0 || h == idx) cycle(1'b1, mk(BC_WRITE, idx, a, $urandom));
        else cycle(1'b1, mk(BC_LOOKUP, 0, a, '0));
      end
    end
    cycle(1'b0, '0);
    cycle(1'b0, '0);
    check(n_hit > 100 && n_miss > 100 && n_evict > 100,
          $sformatf("coverage hit=%0d miss=%0d evict=%0d", n_hit, n_miss, n_evict));
    $display("lookups: %0d hits, %0d misses; %0d valid entries overwritten", n_hit, n_miss, n_evict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
