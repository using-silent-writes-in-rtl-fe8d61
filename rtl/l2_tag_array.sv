// l2_tag_array: tags, valid bits, LRU ages and dirty bits of the L2 cache.
//
// Two memories. The first holds, per set, the valid bit, tag and a 3-bit LRU
// age of each way (true LRU, as in the evaluated system). The second holds the
// dirty bits grouped by eight consecutive sets: entry k has the dirty bit of
// every way of sets 8k..8k+7, bit (s mod 8)*WAYS + way. Those eight sets are
// the "adjacent blocks" whose block-ECCs share one memory-mapped ECC line, so
// one read tells whether any of them is dirty. The grouping, the ages and the
// reset sweep are this design's choices.
//
// After reset the array clears itself one set per cycle (valid = 0, ages set
// to the way number, dirty = 0) and raises ready; that takes SETS cycles.
//
// Interface: rd/rset reads a set; wr/wset writes the set entry went and the
// dirty group wdirty of group wset/8. Timing: synchronous read, rent/rdirty
// valid the cycle after rd; a write is seen by a read issued in a later cycle.
module l2_tag_array
  import tcc_pkg::*;
#(
  parameter int unsigned SETS = 2048
) (
  input  logic                          clk,
  input  logic                          rst_n,
  output logic                          ready,
  input  logic                          rd,
  input  logic [$clog2(SETS)-1:0]       rset,
  output tag_entry_t                    rent,
  output logic [ADJ*L2_WAYS-1:0]        rdirty,
  input  logic                          wr,
  input  logic [$clog2(SETS)-1:0]       wset,
  input  tag_entry_t                    went,
  input  logic [ADJ*L2_WAYS-1:0]        wdirty
);

  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned GW = SW - $clog2(ADJ);

  tag_entry_t               tags  [SETS];
  logic [ADJ*L2_WAYS-1:0]   dirty [SETS/ADJ];
  logic [SW:0]              init_cnt;

  tag_entry_t clear_ent;
  always_comb begin
    clear_ent = '0;
    for (int w = 0; w < L2_WAYS; w++) clear_ent.age[w] = WAY_W'(w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) init_cnt <= '0;
    else if (!init_cnt[SW]) init_cnt <= init_cnt + 1'b1;
  end
  assign ready = init_cnt[SW];

  always_ff @(posedge clk) begin
    if (!ready) begin
      tags[init_cnt[SW-1:0]] <= clear_ent;
      if (init_cnt[$clog2(ADJ)-1:0] == '0) dirty[init_cnt[SW-1 -: GW]] <= '0;
    end else if (wr) begin
      tags[wset]            <= went;
      dirty[wset[SW-1 -: GW]] <= wdirty;
    end
    if (rd) begin
      rent   <= tags[rset];
      rdirty <= dirty[rset[SW-1 -: GW]];
    end
  end

endmodule
