// bc_cam: entry storage and tag match of the buddy cache.
//
// ENTRIES entries, each a valid bit, an ADDR_W-bit tag (the DRAM address of a
// metadata word) and a DATA_W-bit metadata value, as in the paper's table of
// the buddy cache (Valid / DRAM address / Metadata value). Every entry compares
// its tag with lookup_addr at once, as a content-addressable memory does, and
// the match vector is priority-encoded into hit_idx. The tags are kept unique
// by the client (a fill only follows a miss); the assertion below checks it.
//
// Interface and timing: lookup and read are combinational from
// lookup_addr / rd_idx. A write (wr_en) and a clear take effect at the next
// rising clock edge; clear has priority over a write in the same cycle and
// invalidates every entry, as does reset. Reading an invalid entry returns 0
// (this design's choice; the paper shows such an entry as don't-care).
module bc_cam
  import bc_pkg::*;
#(
  parameter int unsigned ENTRIES = BC_ENTRIES_DEFAULT,
  parameter int unsigned ADDR_W  = BC_ADDR_W,
  parameter int unsigned DATA_W  = BC_DATA_W,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // associative search
  input  logic [ADDR_W-1:0] lookup_addr,
  output logic              hit,
  output logic [IDX_W-1:0]  hit_idx,
  output logic [ENTRIES-1:0] match,
  // indexed read
  input  logic [IDX_W-1:0]  rd_idx,
  output logic [DATA_W-1:0] rd_data,
  // indexed write (fill)
  input  logic              wr_en,
  input  logic [IDX_W-1:0]  wr_idx,
  input  logic [ADDR_W-1:0] wr_tag,
  input  logic [DATA_W-1:0] wr_data
);

  logic [ENTRIES-1:0] valid_q;
  logic [ADDR_W-1:0]  tag_q  [ENTRIES];
  logic [DATA_W-1:0]  data_q [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
    end else if (clear) begin
      valid_q <= '0;
    end else if (wr_en) begin
      valid_q[wr_idx] <= 1'b1;
    end
  end

  // Tag and value storage carry no reset: they are only read behind valid_q.
  always_ff @(posedge clk) begin
    if (wr_en && !clear) begin
      tag_q[wr_idx]  <= wr_tag;
      data_q[wr_idx] <= wr_data;
    end
  end

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      match[i] = valid_q[i] && (tag_q[i] == lookup_addr);
    end
  end

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (match[i]) begin
        hit     = 1'b1;
        hit_idx = IDX_W'(i);
      end
    end
  end

  assign rd_data = valid_q[rd_idx] ? data_q[rd_idx] : '0;

  // A tag may be held by one entry only.
  a_unique_tag : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(match))
    else $error("bc_cam: address %h matches more than one entry", lookup_addr);

endmodule
