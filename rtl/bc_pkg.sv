// bc_pkg: types and constants shared by the buddy-cache modules.
//
// The buddy cache is a small, fully associative store of buddy-allocator
// metadata words that sits beside a PIM core's pipeline. Each entry holds a
// valid bit, the 4-byte DRAM (MRAM) address of a metadata word as its tag and
// the 4-byte metadata value itself; the baseline cache has 16 entries (64 B of
// metadata). These numbers follow the paper. The cache is driven by four
// instruction-set extensions, init_bc, lookup_bc, read_bc and write_bc; the
// paper names them and their meaning, but gives no encoding, so the operation
// code below and the operand layout of bc_req_t are this design's own choice.
package bc_pkg;

  // Widths of one entry, as given by the paper (4 B tag, 4 B value).
  localparam int unsigned BC_ADDR_W = 32;
  localparam int unsigned BC_DATA_W = 32;
  // Baseline number of entries (16 x 4 B = 64 B of metadata).
  localparam int unsigned BC_ENTRIES_DEFAULT = 16;

  // Decoded buddy-cache operation, as handed over by the core's decoder.
  typedef enum logic [1:0] {
    BC_INIT   = 2'd0,  // init_bc  : invalidate every entry, reset LRU order
    BC_LOOKUP = 2'd1,  // lookup_bc: tag search; >=0 hit index, <0 miss (~victim)
    BC_READ   = 2'd2,  // read_bc  : return the value of entry idx
    BC_WRITE  = 2'd3   // write_bc : fill entry idx with (addr, data), make it MRU
  } bc_op_e;

  // One buddy-cache instruction with its register operands.
  typedef struct packed {
    bc_op_e                 op;
    logic [31:0]            idx;   // entry index operand (read_bc, write_bc)
    logic [BC_ADDR_W-1:0]   addr;  // DRAM address of the metadata word (lookup_bc, write_bc)
    logic [BC_DATA_W-1:0]   data;  // metadata value to store (write_bc)
  } bc_req_t;

endpackage
