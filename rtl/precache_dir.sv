// precache_dir: pre-cache directory kept beside one cache level.
//
// Holds the line addresses of pre-cache entries whose load was served by this
// level or a level below it, so the directories are "reverse inclusive". When
// this level evicts a line, or an invalidation passes through it, the line is
// probed here (probe_*); a hit means the pre-cache holds a copy, so an
// invalidation must be sent up to the pre-cache (probe_hit) and the entry is
// removed. An STC passing this level removes its entry (rm_*), as does a
// committed store to the line. Entry i shadows pre-cache entry i: an insert
// (ins_*) names the pre-cache entry the line was put in, and a squash clears
// exactly the entries the pre-cache clears (clear_mask, the pre-cache's
// clr_mask), so the lines of surviving loads and the line of a running STC
// stay tracked.
//
// Timing: probe_hit is combinational; insert/remove/clear act at the next
// clock edge. Synchronous active-low reset empties it.
//
// From the paper: what is stored, when entries are added, removed and probed,
// and that the squash clears the directories after the pre-cache. This
// design's choices: ENTRIES addresses, one per pre-cache entry and indexed
// like it, so the directory can never overflow; the squash is passed as the
// pre-cache's mask of cleared entries.
module precache_dir #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned KEY_W   = precache_pkg::KEY_W,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ins_valid,
  input  logic [IDX_W-1:0]   ins_idx,
  input  logic [KEY_W-1:0]   ins_key,
  input  logic               rm_valid,
  input  logic [KEY_W-1:0]   rm_key,
  input  logic               probe_valid,
  input  logic [KEY_W-1:0]   probe_key,
  output logic               probe_hit,
  input  logic [ENTRIES-1:0] clear_mask
);

  logic [ENTRIES-1:0] valid_q;
  logic [KEY_W-1:0]   key_q [ENTRIES];
  logic [ENTRIES-1:0] rm_m, pr_m;

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      rm_m[i] = valid_q[i] && key_q[i] == rm_key;
      pr_m[i] = valid_q[i] && key_q[i] == probe_key;
    end
    probe_hit = probe_valid && |pr_m;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_q <= '0;
    else begin
      logic [ENTRIES-1:0] v;
      v = valid_q;
      if (ins_valid) begin
        v[ins_idx]     = 1'b1;
        key_q[ins_idx] <= ins_key;
      end
      if (rm_valid)    v = v & ~rm_m;
      if (probe_valid) v = v & ~pr_m;
      v = v & ~clear_mask;
      valid_q <= v;
    end
  end

endmodule
