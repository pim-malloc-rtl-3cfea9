// tb_bc_size_sweep: buddy-cache hit rate against cache size.
//
// Runs the 4 KB microbenchmark (16 threads x 128 requests, all served by the
// buddy allocator) on caches of 4, 8, 16, 32 and 64 entries, i.e. 16 B to
// 256 B of metadata, the range of the paper's sensitivity study. The paper
// finds the hit rate rising with size and saturating from 64 B (16 entries),
// where it is about 99%. Checks: the hit rate never falls as the cache grows,
// it is at least 90% from 16 entries on, and 4 entries do clearly worse than
// 16. Also sums the functional checks of the five harnesses.
module tb_bc_size_sweep;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int K = 5;
  logic   done [K];
  int     hc [K], hf [K];
  longint hit [K], miss [K], ev [K], nm [K], fh [K], fm [K], by [K], br [K], db [K];

  bc_alloc_harness #(.ENTRIES(4),  .WORKLOAD(0), .THREADS(16), .SIZE(4096)) h0 (.clk, .rst_n, .done(done[0]), .checks(hc[0]), .failures(hf[0]), .n_hit(hit[0]), .n_miss(miss[0]), .n_evict(ev[0]), .n_mallocs(nm[0]), .n_front_hit(fh[0]), .n_front_miss(fm[0]), .n_bypass(by[0]), .n_block_return(br[0]), .n_dram_bytes(db[0]));
  bc_alloc_harness #(.ENTRIES(8),  .WORKLOAD(0), .THREADS(16), .SIZE(4096)) h1 (.clk, .rst_n, .done(done[1]), .checks(hc[1]), .failures(hf[1]), .n_hit(hit[1]), .n_miss(miss[1]), .n_evict(ev[1]), .n_mallocs(nm[1]), .n_front_hit(fh[1]), .n_front_miss(fm[1]), .n_bypass(by[1]), .n_block_return(br[1]), .n_dram_bytes(db[1]));
  bc_alloc_harness #(.ENTRIES(16), .WORKLOAD(0), .THREADS(16), .SIZE(4096)) h2 (.clk, .rst_n, .done(done[2]), .checks(hc[2]), .failures(hf[2]), .n_hit(hit[2]), .n_miss(miss[2]), .n_evict(ev[2]), .n_mallocs(nm[2]), .n_front_hit(fh[2]), .n_front_miss(fm[2]), .n_bypass(by[2]), .n_block_return(br[2]), .n_dram_bytes(db[2]));
  bc_alloc_harness #(.ENTRIES(32), .WORKLOAD(0), .THREADS(16), .SIZE(4096)) h3 (.clk, .rst_n, .done(done[3]), .checks(hc[3]), .failures(hf[3]), .n_hit(hit[3]), .n_miss(miss[3]), .n_evict(ev[3]), .n_mallocs(nm[3]), .n_front_hit(fh[3]), .n_front_miss(fm[3]), .n_bypass(by[3]), .n_block_return(br[3]), .n_dram_bytes(db[3]));
  bc_alloc_harness #(.ENTRIES(64), .WORKLOAD(0), .THREADS(16), .SIZE(4096)) h4 (.clk, .rst_n, .done(done[4]), .checks(hc[4]), .failures(hf[4]), .n_hit(hit[4]), .n_miss(miss[4]), .n_evict(ev[4]), .n_mallocs(nm[4]), .n_front_hit(fh[4]), .n_front_miss(fm[4]), .n_bypass(by[4]), .n_block_return(br[4]), .n_dram_bytes(db[4]));

  int checks = 0, failures = 0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100_000_000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    real rate [K];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < K; i++) wait (done[i]);
    for (int i = 0; i < K; i++) begin
      rate[i] = real'(hit[i]) / real'(hit[i] + miss[i]);
      $display("%3d B cache (%2d entries): hit rate %6.2f%%, %0.2f B metadata fetched per request",
               4 * (4 << i), 4 << i, 100.0 * rate[i], real'(db[i]) / real'(nm[i]));
      checks += hc[i];
      failures += hf[i];
    end
    for (int i = 1; i < K; i++) check(rate[i] >= rate[i-1], $sformatf("hit rate does not fall from %0d to %0d entries", 4 << (i-1), 4 << i));
    for (int i = 2; i < K; i++) check(rate[i] >= 0.90, $sformatf("hit rate at %0d entries at least 90%%", 4 << i));
    check(rate[0] < rate[2] - 0.02, "4 entries clearly worse than 16");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
