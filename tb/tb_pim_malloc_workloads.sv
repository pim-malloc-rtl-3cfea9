// tb_pim_malloc_workloads: the buddy cache (default 16 entries) under the
// allocation patterns the paper evaluates, with a model of the allocator
// software around it (see bc_alloc_harness).
//
// Workloads: the microbenchmark with 1 and 16 threads and 32 B, 256 B and
// 4 KB requests (128 per thread); the dynamic graph update with an array of
// linked lists (256 B elements) and with variable-sized arrays (64 B .. 32 KB);
// the KV cache of an LLM attention layer (512 B blocks). Request counts are
// scaled to simulate in seconds. Besides the functional checks of each
// harness, the testbench checks what the paper's design relies on: requests
// up to 2 KB are served by the thread cache almost always (at least 90% for
// the microbenchmark; at least 85% each and 90% on average for the graph and
// LLM workloads, where the paper reports 93% on average), 4 KB requests always
// bypass it, and the buddy-cache hit rate stays at least 90%. The
// thread-cache share, bypass count, buddy-cache hit rate and metadata bytes
// fetched per request are printed per workload.
module tb_pim_malloc_workloads;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int K = 9;
  logic   done [K];
  int     hc [K], hf [K];
  longint hit [K], miss [K], ev [K], nm [K], fh [K], fm [K], by [K], br [K], db [K];
  string  name [K];

  bc_alloc_harness #(.WORKLOAD(0), .THREADS(1), .SIZE(32), .SEED(1)) h0 (.clk, .rst_n, .done(done[0]), .checks(hc[0]), .failures(hf[0]), .n_hit(hit[0]), .n_miss(miss[0]), .n_evict(ev[0]), .n_mallocs(nm[0]), .n_front_hit(fh[0]), .n_front_miss(fm[0]), .n_bypass(by[0]), .n_block_return(br[0]), .n_dram_bytes(db[0]));
  bc_alloc_harness #(.WORKLOAD(0), .THREADS(1), .SIZE(256), .SEED(2)) h1 (.clk, .rst_n, .done(done[1]), .checks(hc[1]), .failures(hf[1]), .n_hit(hit[1]), .n_miss(miss[1]), .n_evict(ev[1]), .n_mallocs(nm[1]), .n_front_hit(fh[1]), .n_front_miss(fm[1]), .n_bypass(by[1]), .n_block_return(br[1]), .n_dram_bytes(db[1]));
  bc_alloc_harness #(.WORKLOAD(0), .THREADS(1), .SIZE(4096), .SEED(3)) h2 (.clk, .rst_n, .done(done[2]), .checks(hc[2]), .failures(hf[2]), .n_hit(hit[2]), .n_miss(miss[2]), .n_evict(ev[2]), .n_mallocs(nm[2]), .n_front_hit(fh[2]), .n_front_miss(fm[2]), .n_bypass(by[2]), .n_block_return(br[2]), .n_dram_bytes(db[2]));
  bc_alloc_harness #(.WORKLOAD(0), .THREADS(16), .SIZE(32), .SEED(4)) h3 (.clk, .rst_n, .done(done[3]), .checks(hc[3]), .failures(hf[3]), .n_hit(hit[3]), .n_miss(miss[3]), .n_evict(ev[3]), .n_mallocs(nm[3]), .n_front_hit(fh[3]), .n_front_miss(fm[3]), .n_bypass(by[3]), .n_block_return(br[3]), .n_dram_bytes(db[3]));
  bc_alloc_harness #(.WORKLOAD(0), .THREADS(16), .SIZE(256), .SEED(5)) h4 (.clk, .rst_n, .done(done[4]), .checks(hc[4]), .failures(hf[4]), .n_hit(hit[4]), .n_miss(miss[4]), .n_evict(ev[4]), .n_mallocs(nm[4]), .n_front_hit(fh[4]), .n_front_miss(fm[4]), .n_bypass(by[4]), .n_block_return(br[4]), .n_dram_bytes(db[4]));
  bc_alloc_harness #(.WORKLOAD(0), .THREADS(16), .SIZE(4096), .SEED(6)) h5 (.clk, .rst_n, .done(done[5]), .checks(hc[5]), .failures(hf[5]), .n_hit(hit[5]), .n_miss(miss[5]), .n_evict(ev[5]), .n_mallocs(nm[5]), .n_front_hit(fh[5]), .n_front_miss(fm[5]), .n_bypass(by[5]), .n_block_return(br[5]), .n_dram_bytes(db[5]));
  bc_alloc_harness #(.WORKLOAD(1), .THREADS(16), .SIZE(4096), .SEED(7)) h6 (.clk, .rst_n, .done(done[6]), .checks(hc[6]), .failures(hf[6]), .n_hit(hit[6]), .n_miss(miss[6]), .n_evict(ev[6]), .n_mallocs(nm[6]), .n_front_hit(fh[6]), .n_front_miss(fm[6]), .n_bypass(by[6]), .n_block_return(br[6]), .n_dram_bytes(db[6]));
  bc_alloc_harness #(.WORKLOAD(2), .THREADS(16), .SIZE(4096), .SEED(8)) h7 (.clk, .rst_n, .done(done[7]), .checks(hc[7]), .failures(hf[7]), .n_hit(hit[7]), .n_miss(miss[7]), .n_evict(ev[7]), .n_mallocs(nm[7]), .n_front_hit(fh[7]), .n_front_miss(fm[7]), .n_bypass(by[7]), .n_block_return(br[7]), .n_dram_bytes(db[7]));
  bc_alloc_harness #(.WORKLOAD(3), .THREADS(16), .SIZE(4096), .SEED(9)) h8 (.clk, .rst_n, .done(done[8]), .checks(hc[8]), .failures(hf[8]), .n_hit(hit[8]), .n_miss(miss[8]), .n_evict(ev[8]), .n_mallocs(nm[8]), .n_front_hit(fh[8]), .n_front_miss(fm[8]), .n_bypass(by[8]), .n_block_return(br[8]), .n_dram_bytes(db[8]));

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    real front, rate;
    name[0] = "microbenchmark 1 thread x 128 x 32 B";
    name[1] = "microbenchmark 1 thread x 128 x 256 B";
    name[2] = "microbenchmark 1 thread x 128 x 4 KB";
    name[3] = "microbenchmark 16 threads x 128 x 32 B";
    name[4] = "microbenchmark 16 threads x 128 x 256 B";
    name[5] = "microbenchmark 16 threads x 128 x 4 KB";
    name[6] = "graph update, array of linked lists (256 B)";
    name[7] = "graph update, variable-sized arrays (64 B .. 32 KB)";
    name[8] = "LLM attention KV cache (512 B)";
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < K; i++) wait (done[i]);
    for (int i = 0; i < K; i++) begin
      front = real'(fh[i]) / real'(nm[i]);
      rate  = real'(hit[i]) / real'(hit[i] + miss[i]);
      $display("%-52s: %6d requests, thread cache %6.2f%%, bypass %5d, blocks returned %4d, buddy-cache hit %6.2f%%, %0.2f B metadata/request",
               name[i], nm[i], 100.0 * front, by[i], br[i], 100.0 * rate, real'(db[i]) / real'(nm[i]));
      checks += hc[i];
      failures += hf[i];
      check(rate >= 0.90, $sformatf("%s: buddy-cache hit rate at least 90%%", name[i]));
    end
    // 32 B and 256 B requests: almost all served by the thread cache
    for (int i = 0; i < 6; i++) if (i % 3 != 2) check(real'(fh[i]) / real'(nm[i]) >= 0.90, $sformatf("%s: thread cache serves at least 90%%", name[i]));
    // 4 KB requests: all bypass the thread cache
    check(by[2] == nm[2] && by[5] == nm[5], "4 KB requests bypass the thread cache");
    // graph and LLM workloads: the paper reports 93% of requests served by the
    // frontend on average; here each must reach 85% and their mean 90%
    front = 0.0;
    for (int i = 6; i < K; i++) begin
      check(real'(fh[i]) / real'(nm[i]) >= 0.85, $sformatf("%s: thread cache serves at least 85%%", name[i]));
      front += real'(fh[i]) / real'(nm[i]) / real'(K - 6);
    end
    $display("graph and LLM workloads: mean thread-cache share %0.2f%%", 100.0 * front);
    check(front >= 0.90, "graph and LLM workloads: mean thread-cache share at least 90%");
    check(fm[7] > 0 && by[7] > 0 && br[7] > 0, "variable arrays exercise thread-cache misses, bypasses and block returns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
