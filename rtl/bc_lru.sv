// bc_lru: true least-recently-used order over the buddy-cache entries.
//
// The paper manages the buddy cache with an LRU replacement policy but does
// not say how the order is kept; this block uses one age counter per entry.
// The ages always form a permutation of 0..ENTRIES-1, 0 being the most
// recently used entry and ENTRIES-1 the least recently used one, which is the
// victim. Touching entry j makes it age 0 and ages by one every entry that
// was younger than j; older entries keep their age.
//
// Interface and timing: victim is combinational from the state. A touch or an
// init takes effect at the next rising clock edge; init (and reset) restores
// the order in which entry 0 is the victim, then entry 1, and so on, so that
// after an init the entries are filled in index order. init wins over touch.
module bc_lru
  import bc_pkg::*;
#(
  parameter int unsigned ENTRIES = BC_ENTRIES_DEFAULT,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             init,
  input  logic             touch,
  input  logic [IDX_W-1:0] touch_idx,
  output logic [IDX_W-1:0] victim
);

  logic [IDX_W-1:0] age_q [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) age_q[i] <= IDX_W'(ENTRIES - 1 - i);
    end else if (init) begin
      for (int i = 0; i < ENTRIES; i++) age_q[i] <= IDX_W'(ENTRIES - 1 - i);
    end else if (touch) begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (IDX_W'(i) == touch_idx)           age_q[i] <= '0;
        else if (age_q[i] < age_q[touch_idx]) age_q[i] <= age_q[i] + 1'b1;
      end
    end
  end

  always_comb begin
    victim = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (age_q[i] == IDX_W'(ENTRIES - 1)) victim = IDX_W'(i);
    end
  end

  // The ages stay a permutation: exactly one entry is the oldest.
  logic [ENTRIES-1:0] oldest;
  always_comb for (int i = 0; i < ENTRIES; i++) oldest[i] = (age_q[i] == IDX_W'(ENTRIES - 1));
  a_one_victim : assert property (@(posedge clk) disable iff (!rst_n) $onehot(oldest))
    else $error("bc_lru: ages are no longer a permutation");

endmodule
