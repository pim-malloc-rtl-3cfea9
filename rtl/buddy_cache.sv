// buddy_cache: per-PIM-core hardware cache of buddy-allocator metadata.
//
// A PIM core's buddy allocator walks a tree whose node states live in the DRAM
// bank (MRAM). The buddy cache keeps the most recently used metadata words on
// chip so that the walk rarely has to go to DRAM. It is a fully associative
// cache of ENTRIES entries (16 by default, 64 B of metadata), each a valid bit,
// the 32-bit DRAM address of a metadata word as tag and the 32-bit word
// itself, with least-recently-used replacement; all of that follows the paper.
// The cache does not talk to DRAM itself: software on the core moves the data,
// using four instructions (names and meaning from the paper):
//
//   init_bc              invalidate every entry and reset the LRU order
//   lookup_bc(addr)      search the tags; result >= 0 is the hit entry index,
//                        result < 0 is a miss and its bitwise inverse is the
//                        LRU entry, the one to refill
//   read_bc(idx)         return the value held in entry idx
//   write_bc(idx,addr,v) store tag addr and value v in entry idx
//
// The miss path is therefore: lookup_bc misses -> software reads the word from
// DRAM into the scratchpad -> write_bc into the LRU entry the lookup named,
// which evicts that entry's old content -> read_bc (or use v directly).
//
// Choices of this design where the paper is silent: the result encoding of
// lookup_bc (the paper says only "positive" for a hit and "negative" for a
// miss; a hit in entry 0 returns 0 here, and a miss returns the victim as
// ~victim so that software needs no second instruction to find it); a hit in
// lookup_bc and any write_bc make that entry the most recently used, read_bc
// leaves the order alone; read_bc of an invalid or out-of-range entry returns
// 0 and write_bc to an out-of-range index is dropped; the cache is written
// through by software, so an evicted entry is simply overwritten.
//
// Interface and timing: one operation may be issued every cycle (req_valid,
// req); its result appears on rsp_result with rsp_valid exactly one cycle
// later, matching the paper's access latency of one PIM core cycle. State
// changes at the same clock edge, so an operation sees every earlier one.
// write_bc, init_bc and a lookup hit/miss return through the same port
// (0 for init_bc and write_bc). Reset is asynchronous, active low, and acts
// like init_bc.
module buddy_cache
  import bc_pkg::*;
#(
  parameter int unsigned ENTRIES = BC_ENTRIES_DEFAULT,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // decoded buddy-cache instruction from the pipeline
  input  logic        req_valid,
  input  bc_req_t     req,
  // result to the register file, one cycle later
  output logic        rsp_valid,
  output logic [31:0] rsp_result
);

  logic                 hit;
  logic [IDX_W-1:0]     hit_idx;
  logic [ENTRIES-1:0]   match;
  logic [BC_DATA_W-1:0] rd_data;
  logic [IDX_W-1:0]     victim;
  logic [IDX_W-1:0]     op_idx;
  logic                 idx_ok;
  logic                 do_init, do_write, do_touch;
  logic [IDX_W-1:0]     touch_idx;
  logic [31:0]          result;

  assign op_idx = req.idx[IDX_W-1:0];
  assign idx_ok = (req.idx < 32'(ENTRIES));

  assign do_init  = req_valid && (req.op == BC_INIT);
  assign do_write = req_valid && (req.op == BC_WRITE) && idx_ok;

  always_comb begin
    do_touch  = 1'b0;
    touch_idx = op_idx;
    if (req_valid && req.op == BC_LOOKUP && hit) begin
      do_touch  = 1'b1;
      touch_idx = hit_idx;
    end else if (do_write) begin
      do_touch  = 1'b1;
    end
  end

  bc_cam #(.ENTRIES(ENTRIES), .ADDR_W(BC_ADDR_W), .DATA_W(BC_DATA_W)) u_cam (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear       (do_init),
    .lookup_addr (req.addr),
    .hit         (hit),
    .hit_idx     (hit_idx),
    .match       (match),
    .rd_idx      (op_idx),
    .rd_data     (rd_data),
    .wr_en       (do_write),
    .wr_idx      (op_idx),
    .wr_tag      (req.addr),
    .wr_data     (req.data)
  );

  bc_lru #(.ENTRIES(ENTRIES)) u_lru (
    .clk       (clk),
    .rst_n     (rst_n),
    .init      (do_init),
    .touch     (do_touch),
    .touch_idx (touch_idx),
    .victim    (victim)
  );

  always_comb begin
    result = '0;
    unique case (req.op)
      BC_INIT:   result = '0;
      BC_LOOKUP: result = hit ? 32'(hit_idx) : ~32'(victim);
      BC_READ:   result = idx_ok ? rd_data : '0;
      BC_WRITE:  result = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid  <= 1'b0;
      rsp_result <= '0;
    end else begin
      rsp_valid  <= req_valid;
      if (req_valid) rsp_result <= result;
    end
  end

  // Every instruction gets exactly one result, one cycle later.
  a_one_cycle_result : assert property (@(posedge clk) disable iff (!rst_n) req_valid |=> rsp_valid)
    else $error("buddy_cache: instruction without a result in the next cycle");
  a_no_spurious_result : assert property (@(posedge clk) disable iff (!rst_n) !req_valid |=> !rsp_valid)
    else $error("buddy_cache: result without an instruction");

  // The match vector is only meaningful to the client during a lookup.
  logic unused_match;
  assign unused_match = ^match;

endmodule
