// load_value_cache: the Load Value Cache (LVC) of MEC1.
// M fully associative entries, each with a tag (the line address
// <row, column, bank>), a valid bit and one cache line of data, as drawn in
// the paper, with LRU replacement. The paper asks for M > (2*tPD + tRL)/tCCD,
// i.e. M > 10 for 35 ns of propagation delay; the default here is 16.
//
// Beyond the paper's fields each entry keeps:
//  * gen   - a generation count, bumped on every allocation. The prefetch
//            carries {gen, index}; a returning line whose gen no longer
//            matches belongs to an evicted entry and is dropped.
//  * fill  - how many beats of the line have arrived.
//  * drain - set when a second load consumed the entry: valid is cleared at
//            once (as in the paper), but the entry is not reallocated until
//            its data has been sent to the controller tRL later.
//  * age   - LRU rank, a permutation of 0..M-1 (0 = most recently allocated).
//
// Ports (all updates take effect at the clock edge, lookups are
// combinational):
//  lk_*    tag lookup: hit and index of a valid entry with that tag.
//  alloc_* allocate an entry for a tag: a free entry (neither valid nor
//          draining) if any, otherwise the least recently used valid one.
//          alloc_idx/alloc_tag_id/alloc_ok are valid in the same cycle.
//  cons_*  second load consumed entry cons_idx (valid -> 0, drain -> 1).
//  rel_*   the entry's data has been sent (drain -> 0).
//  inv_*   a write to a tag: a valid matching entry is invalidated.
//  fill_*  one returned beat for entry {gen, index}.
//  rd_*    read one beat of an entry.
//  rdy_*   rd_ready says beat 0 of entry rdy_idx has arrived.
module load_value_cache
  import tl_pkg::*;
#(
  parameter int unsigned M      = 16,
  localparam int unsigned IDX_W = $clog2(M),
  localparam int unsigned GEN_W = TAG_ID_W - IDX_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // lookup
  input  logic [LADDR_W-1:0]   lk_tag,
  output logic                 lk_hit,
  output logic [IDX_W-1:0]     lk_idx,
  // allocate
  input  logic                 alloc_en,
  input  logic [LADDR_W-1:0]   alloc_tag,
  output logic                 alloc_ok,
  output logic [IDX_W-1:0]     alloc_idx,
  output logic [TAG_ID_W-1:0]  alloc_tag_id,
  output logic                 alloc_evict,   // a valid entry is being replaced
  // consume / release
  input  logic                 cons_en,
  input  logic [IDX_W-1:0]     cons_idx,
  input  logic                 rel_en,
  input  logic [IDX_W-1:0]     rel_idx,
  // invalidate on write
  input  logic                 inv_en,
  input  logic [LADDR_W-1:0]   inv_tag,
  output logic                 inv_hit,
  // fill from the tree
  input  logic                 fill_en,
  input  logic [TAG_ID_W-1:0]  fill_tag_id,
  input  logic [BEAT_IW-1:0]   fill_beat,
  input  logic [BEAT_W-1:0]    fill_data,
  // read
  input  logic [IDX_W-1:0]     rd_idx,
  input  logic [BEAT_IW-1:0]   rd_beat,
  output logic [BEAT_W-1:0]    rd_data,
  // readiness
  input  logic [IDX_W-1:0]     rdy_idx,
  output logic                 rd_ready
);
  logic [LADDR_W-1:0] tag_q   [M];
  logic               valid_q [M];
  logic               drain_q [M];
  logic [GEN_W-1:0]   gen_q   [M];
  logic [BEAT_IW:0]   fill_q  [M];
  logic [IDX_W-1:0]   age_q   [M];
  logic [BEAT_W-1:0]  data_q  [M][BURST];

  // ---------------- lookup ----------------
  always_comb begin
    lk_hit = 1'b0;
    lk_idx = '0;
    for (int i = 0; i < M; i++) begin
      if (valid_q[i] && tag_q[i] == lk_tag && !lk_hit) begin
        lk_hit = 1'b1;
        lk_idx = IDX_W'(i);
      end
    end
  end

  // ---------------- victim choice ----------------
  logic             free_found, lru_found;
  logic [IDX_W-1:0] free_idx, lru_idx;
  logic [IDX_W-1:0] lru_age;
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    lru_found  = 1'b0;
    lru_idx    = '0;
    lru_age    = '0;
    for (int i = 0; i < M; i++) begin
      if (!valid_q[i] && !drain_q[i] && !free_found) begin
        free_found = 1'b1;
        free_idx   = IDX_W'(i);
      end
      if (valid_q[i] && !drain_q[i] && (!lru_found || age_q[i] > lru_age)) begin
        lru_found = 1'b1;
        lru_idx   = IDX_W'(i);
        lru_age   = age_q[i];
      end
    end
    alloc_ok     = free_found || lru_found;
    alloc_idx    = free_found ? free_idx : lru_idx;
    alloc_evict  = alloc_en && !free_found && lru_found;
    alloc_tag_id = {gen_q[alloc_idx] + 1'b1, alloc_idx};
  end

  // invalidate match
  logic [IDX_W-1:0] inv_idx;
  always_comb begin
    inv_hit = 1'b0;
    inv_idx = '0;
    for (int i = 0; i < M; i++) begin
      if (valid_q[i] && tag_q[i] == inv_tag && !inv_hit) begin
        inv_hit = 1'b1;
        inv_idx = IDX_W'(i);
      end
    end
  end

  wire [IDX_W-1:0] fill_idx = fill_tag_id[IDX_W-1:0];
  wire [GEN_W-1:0] fill_gen = fill_tag_id[TAG_ID_W-1:IDX_W];
  wire             fill_ok  = fill_en && gen_q[fill_idx] == fill_gen &&
                              (valid_q[fill_idx] || drain_q[fill_idx]);

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < M; i++) begin
        tag_q[i]   <= '0;
        valid_q[i] <= 1'b0;
        drain_q[i] <= 1'b0;
        gen_q[i]   <= '0;
        fill_q[i]  <= '0;
        age_q[i]   <= IDX_W'(i);
      end
    end else begin
      if (fill_ok) fill_q[fill_idx] <= {1'b0, fill_beat} + 1'b1;
      if (inv_en && inv_hit) valid_q[inv_idx] <= 1'b0;
      if (rel_en) drain_q[rel_idx] <= 1'b0;
      if (cons_en) begin
        valid_q[cons_idx] <= 1'b0;
        drain_q[cons_idx] <= 1'b1;
      end
      if (alloc_en && alloc_ok) begin
        tag_q[alloc_idx]   <= alloc_tag;
        valid_q[alloc_idx] <= 1'b1;
        drain_q[alloc_idx] <= 1'b0;
        gen_q[alloc_idx]   <= gen_q[alloc_idx] + 1'b1;
        fill_q[alloc_idx]  <= '0;
        for (int i = 0; i < M; i++) begin
          if (age_q[i] < age_q[alloc_idx]) age_q[i] <= age_q[i] + 1'b1;
        end
        age_q[alloc_idx] <= '0;
      end
    end
  end

  // Line storage: no reset, a beat is only read once fill says it arrived.
  always_ff @(posedge clk) begin
    if (fill_ok) data_q[fill_idx][fill_beat] <= fill_data;
  end

  assign rd_data  = data_q[rd_idx][rd_beat];
  assign rd_ready = fill_q[rdy_idx] != '0;

  // A consumed or released entry is never allocated in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(alloc_en && alloc_ok && cons_en && cons_idx == alloc_idx));
endmodule
