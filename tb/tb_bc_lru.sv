// tb_bc_lru: self-checking test of the buddy-cache LRU order.
//
// A reference list of entry indices (most recent first) is updated on every
// touch; after each clock the victim of the block must be the last element of
// the list. Covers the order right after reset and after init, directed
// touches, touches of the current victim and of the current MRU entry, a
// touch issued together with init, and 2000 random touches.
module tb_bc_lru;
  localparam int unsigned N = 16;
  localparam int unsigned IW = $clog2(N);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic init = 1'b0;
  logic touch = 1'b0;
  logic [IW-1:0] touch_idx = '0;
  logic [IW-1:0] victim;

  int checks = 0, failures = 0;
  int order[$];  // order[0] = most recently used

  bc_lru #(.ENTRIES(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic model_init();
    order.delete();
    for (int i = N - 1; i >= 0; i--) order.push_back(i);  // entry 0 is the LRU
  endtask

  task automatic model_touch(input int j);
    foreach (order[k]) if (order[k] == j) begin order.delete(k); break; end
    order.push_front(j);
  endtask

  task automatic check_victim(input string where);
    checks++;
    if (victim != IW'(order[N-1])) begin
      failures++;
      $display("FAIL: %s victim=%0d exp %0d", where, victim, order[N-1]);
    end
  endtask

  task automatic do_touch(input int j);
    @(negedge clk);
    touch = 1'b1; touch_idx = IW'(j);
    @(negedge clk);
    touch = 1'b0;
    model_touch(j);
    check_victim($sformatf("after touch %0d", j));
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model_init();
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check_victim("after reset");
    // Filling in victim order walks the entries 0, 1, 2, ...
    for (int i = 0; i < N; i++) begin
      checks++;
      if (victim != IW'(i)) begin failures++; $display("FAIL: fill order %0d got %0d", i, victim); end
      do_touch(int'(victim));
    end
    // Entry 0 is the LRU again; touching the MRU changes nothing.
    do_touch(N - 1);
    do_touch(0);
    do_touch(0);
    do_touch(7);
    // init together with touch: init wins.
    @(negedge clk);
    init = 1'b1; touch = 1'b1; touch_idx = 4;
    @(negedge clk);
    init = 1'b0; touch = 1'b0;
    model_init();
    check_victim("after init");
    for (int n = 0; n < 2000; n++) begin
      int j;
      j = ($urandom % 4 == 0) ? int'(victim) : int'($urandom % N);
      do_touch(j);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
