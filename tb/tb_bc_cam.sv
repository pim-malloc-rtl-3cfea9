// tb_bc_cam: self-checking test of the buddy-cache entry store.
//
// Fills entries with known tags and values, then checks associative lookup
// (hit flag, hit index, one-hot match vector), indexed read, the zero read of
// invalid entries, overwrite of an entry with a new tag, and clear. Expected
// values come from a plain array model kept by the testbench.
module tb_bc_cam;
  localparam int unsigned N = 16;
  localparam int unsigned IW = $clog2(N);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clear = 1'b0;
  logic [31:0] lookup_addr = '0;
  logic hit;
  logic [IW-1:0] hit_idx;
  logic [N-1:0] match;
  logic [IW-1:0] rd_idx = '0;
  logic [31:0] rd_data;
  logic wr_en = 1'b0;
  logic [IW-1:0] wr_idx = '0;
  logic [31:0] wr_tag = '0, wr_data = '0;

  int checks = 0, failures = 0;

  bc_cam #(.ENTRIES(N)) dut (.*);

  always #5 clk = ~clk;

  // model
  logic        m_valid [N];
  logic [31:0] m_tag   [N];
  logic [31:0] m_data  [N];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write(input int i, input logic [31:0] t, input logic [31:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_idx = IW'(i); wr_tag = t; wr_data = d;
    @(negedge clk);
    wr_en = 1'b0;
    m_valid[i] = 1'b1; m_tag[i] = t; m_data[i] = d;
  endtask

  task automatic probe(input logic [31:0] a);
    bit exp_hit = 1'b0;
    int exp_idx = 0;
    for (int i = 0; i < N; i++) if (m_valid[i] && m_tag[i] == a) begin exp_hit = 1'b1; exp_idx = i; end
    lookup_addr = a;
    #1;
    check(hit == exp_hit, $sformatf("hit for %h: got %0d exp %0d", a, hit, exp_hit));
    if (exp_hit) begin
      check(hit_idx == IW'(exp_idx), $sformatf("hit_idx for %h: got %0d exp %0d", a, hit_idx, exp_idx));
      check(match == (N'(1) << exp_idx), $sformatf("match for %h: %b", a, match));
    end else begin
      check(match == '0, $sformatf("match for missing %h: %b", a, match));
    end
  endtask

  task automatic read_all();
    for (int i = 0; i < N; i++) begin
      rd_idx = IW'(i);
      #1;
      check(rd_data == (m_valid[i] ? m_data[i] : 32'h0),
            $sformatf("read %0d: got %h exp %h", i, rd_data, m_valid[i] ? m_data[i] : 32'h0));
    end
  endtask

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin m_valid[i] = 1'b0; m_tag[i] = '0; m_data[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // After reset nothing hits, everything reads 0.
    probe(32'h0800_0000);
    read_all();
    // Fill every entry with metadata words 0x08000000 + 4*k (k scrambled).
    for (int i = 0; i < N; i++) write(i, 32'h0800_0000 + 32'(4 * ((i * 7) % N)), 32'h1111_0000 + 32'(i));
    for (int k = 0; k < N + 4; k++) probe(32'h0800_0000 + 32'(4 * k));
    read_all();
    // Replace entry 5 with a new tag: the old tag must stop hitting.
    write(5, 32'h0800_1000, 32'hCAFE_0005);
    for (int k = 0; k < N; k++) probe(32'h0800_0000 + 32'(4 * k));
    probe(32'h0800_1000);
    read_all();
    // Clear wins over a simultaneous write.
    @(negedge clk);
    clear = 1'b1; wr_en = 1'b1; wr_idx = 3; wr_tag = 32'h0800_2000; wr_data = 32'h1;
    @(negedge clk);
    clear = 1'b0; wr_en = 1'b0;
    for (int i = 0; i < N; i++) m_valid[i] = 1'b0;
    probe(32'h0800_1000);
    probe(32'h0800_2000);
    read_all();
    // Refill one entry after the clear.
    write(9, 32'h0800_0040, 32'h0123_4567);
    probe(32'h0800_0040);
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
