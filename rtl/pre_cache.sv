// pre_cache: the buffer that keeps lines fetched by uncommitted loads out of
// the cache hierarchy.
//
// A fully associative array of ENTRIES lines, looked up in parallel with the
// L1 cache. A load that misses both L1 and the pre-cache gets its line from
// below; the line is filled here (fill_*) together with the level that
// supplied it, instead of into L1. Later loads to the same line hit here
// (lk_*). When a load commits, its line address is presented on cm_*; if the
// line is present and not already moving, the entry is locked and its data
// and hit level are returned so that a store-to-cache (STC) can copy it into
// the levels that missed. The STC engine frees the entry with done_* when the
// STC completes or aborts. Every entry carries the sequence number of the
// oldest load that used it (fill_seq; a second fill of a present line by an
// older load moves it back). A squash names the oldest squashed load
// (squash_seq) and clears every entry that belongs to that load or a younger
// one, unless it is locked by an STC (committed data is never discarded);
// clr_mask shows in the squash cycle which entries go, so that the
// directories can follow. An invalidation (inv_*), which
// comes from a pre-cache directory on an eviction below, from a coherence
// invalidation or from a committed store, drops the matching entry even when
// it is locked, so that the STC is aborted.
//
// Timing: lookups (lk_*, cm_*, inv_*) are combinational; all state changes
// take effect at the next rising clock edge. Reset is active low and
// synchronous to the clock edge; it empties the buffer.
//
// From the paper: associative organisation, 32 entries (load-queue size),
// hit-level field, per-entry STC lock bit, squash clears only the unlocked
// lines of squashed loads, fill instead of L1. This design's choices: a fill of a line that is
// already present is dropped; a fill into a full buffer is refused (fill_ok
// low), the load still gets its data; the first free entry is used. The
// generic KEY_W/DATA_W let the same array hold translations for the TLB
// pre-cache.
module pre_cache #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned KEY_W   = precache_pkg::KEY_W,
  parameter int unsigned DATA_W  = precache_pkg::LINE_W,
  parameter int unsigned LVL_W   = 2,
  parameter int unsigned SEQ_W   = precache_pkg::SEQ_W,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // load lookup
  input  logic [KEY_W-1:0]  lk_key,
  output logic              lk_hit,
  output logic [DATA_W-1:0] lk_data,
  // fill from lower levels
  input  logic              fill_valid,
  input  logic [KEY_W-1:0]  fill_key,
  input  logic [DATA_W-1:0] fill_data,
  input  logic [LVL_W-1:0]  fill_level,
  input  logic [SEQ_W-1:0]  fill_seq,
  output logic              fill_ok,
  output logic [IDX_W-1:0]  fill_idx,
  // commit lookup: starts an STC
  input  logic              cm_valid,
  input  logic [KEY_W-1:0]  cm_key,
  output logic              cm_hit,       // present and unlocked: STC starts
  output logic              cm_coalesced, // present and already moving
  output logic [IDX_W-1:0]  cm_idx,
  output logic [DATA_W-1:0] cm_data,
  output logic [LVL_W-1:0]  cm_level,
  // STC finished (written or aborted): free the entry
  input  logic              done_valid,
  input  logic [IDX_W-1:0]  done_idx,
  // invalidation
  input  logic              inv_valid,
  input  logic [KEY_W-1:0]  inv_key,
  output logic              inv_hit,
  // pipeline squash
  input  logic              squash,
  input  logic [SEQ_W-1:0]  squash_seq,
  output logic [ENTRIES-1:0] clr_mask,
  output logic [IDX_W:0]    occupancy
);

  logic [ENTRIES-1:0]  valid_q, lock_q;
  logic [KEY_W-1:0]    key_q   [ENTRIES];
  logic [DATA_W-1:0]   data_q  [ENTRIES];
  logic [LVL_W-1:0]    level_q [ENTRIES];
  logic [SEQ_W-1:0]    seq_q   [ENTRIES];

  // a is the same load as b or younger (sequence numbers wrap)
  function automatic logic at_or_after(logic [SEQ_W-1:0] a, logic [SEQ_W-1:0] b);
    logic [SEQ_W-1:0] d;
    d = a - b;
    return !d[SEQ_W-1];
  endfunction

  logic [ENTRIES-1:0] lk_m, cm_m, inv_m, fill_m;
  logic               have_free, fill_dup;
  logic [IDX_W-1:0]   free_idx, lk_idx, dup_idx;

  always_comb begin
    lk_m = '0; cm_m = '0; inv_m = '0; fill_m = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      lk_m[i]   = valid_q[i] && key_q[i] == lk_key;
      cm_m[i]   = valid_q[i] && key_q[i] == cm_key;
      inv_m[i]  = valid_q[i] && key_q[i] == inv_key;
      fill_m[i] = valid_q[i] && key_q[i] == fill_key;
    end
    have_free = 1'b0; free_idx = '0;
    for (int i = ENTRIES-1; i >= 0; i--)
      if (!valid_q[i]) begin have_free = 1'b1; free_idx = IDX_W'(i); end
    lk_idx = '0; cm_idx = '0; dup_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (lk_m[i])   lk_idx  = IDX_W'(i);
      if (cm_m[i])   cm_idx  = IDX_W'(i);
      if (fill_m[i]) dup_idx = IDX_W'(i);
    end
    fill_idx = (|fill_m) ? dup_idx : free_idx;
    for (int i = 0; i < ENTRIES; i++)
      clr_mask[i] = squash && valid_q[i] && !lock_q[i] && at_or_after(seq_q[i], squash_seq);
    fill_dup     = |fill_m;
    fill_ok      = fill_dup || have_free;
    lk_hit       = |lk_m;
    lk_data      = data_q[lk_idx];
    cm_hit       = cm_valid && |cm_m && !lock_q[cm_idx];
    cm_coalesced = cm_valid && |cm_m &&  lock_q[cm_idx];
    cm_data      = data_q[cm_idx];
    cm_level     = level_q[cm_idx];
    inv_hit      = inv_valid && |inv_m;
    occupancy    = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy += (IDX_W+1)'(valid_q[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0;
      lock_q  <= '0;
    end else begin
      if (fill_valid && !fill_dup && have_free) begin
        valid_q[free_idx] <= 1'b1;
        lock_q[free_idx]  <= 1'b0;
        key_q[free_idx]   <= fill_key;
        data_q[free_idx]  <= fill_data;
        level_q[free_idx] <= fill_level;
        seq_q[free_idx]   <= fill_seq;
      end
      // a line shared by several loads belongs to the oldest of them
      if (fill_valid && fill_dup && !at_or_after(fill_seq, seq_q[dup_idx]))
        seq_q[dup_idx] <= fill_seq;
      if (cm_hit) lock_q[cm_idx] <= 1'b1;
      if (done_valid) begin
        valid_q[done_idx] <= 1'b0;
        lock_q[done_idx]  <= 1'b0;
      end
      if (inv_valid)
        for (int i = 0; i < ENTRIES; i++)
          if (inv_m[i]) begin valid_q[i] <= 1'b0; lock_q[i] <= 1'b0; end
      for (int i = 0; i < ENTRIES; i++)
        if (clr_mask[i]) valid_q[i] <= 1'b0;
    end
  end

  // Keys are unique, so at most one entry can match any key.
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(lk_m));

endmodule
