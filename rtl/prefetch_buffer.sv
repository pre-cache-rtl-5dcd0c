// prefetch_buffer: holds lines that a hardware prefetcher fetched on behalf
// of a load that has not committed yet, so that prefetching leaves no trace
// in the cache for squashed loads.
//
// Each entry records the line address of the triggering load (trig), the
// prefetched line address, its data once it arrives, and a commit bit.
// pf_* allocates an entry when the prefetcher issues a request; fill_* stores
// the data returned from below. stc_* carries the line address of an STC that
// passes this level (the trigger load committed): matching entries get their
// commit bit set. An entry whose data is present and whose commit bit is set
// is offered on out_* to be written into the cache; data that arrives for an
// entry already committed goes out directly. A squash drops every entry whose
// trigger has not committed. Loads that miss in the cache at this level look
// the buffer up (lk_*); a hit is sent to the pre-cache rather than L1.
//
// Timing: lk_*, pf_ok and out_* are combinational; updates happen at the
// clock edge; out_valid/out_ready is a valid/ready handshake. Synchronous
// active-low reset empties the buffer.
//
// From the paper: indexing by the load address, commit bit, direct send of
// late data, transfer on STC, clear on squash, load service. This design's
// choices: ENTRIES = 16 (the upper end of the 1-16 stream-buffer sizes the
// paper quotes), a full buffer refuses new prefetches, committed entries
// survive a squash (they belong to committed loads, like STC-locked
// pre-cache lines), a duplicate prefetch of a buffered line is refused.
module prefetch_buffer #(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned KEY_W   = precache_pkg::KEY_W,
  parameter int unsigned LINE_W  = precache_pkg::LINE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pf_valid,
  input  logic [KEY_W-1:0]  pf_trig_key,
  input  logic [KEY_W-1:0]  pf_key,
  output logic              pf_ok,
  input  logic              fill_valid,
  input  logic [KEY_W-1:0]  fill_key,
  input  logic [LINE_W-1:0] fill_data,
  input  logic              stc_valid,
  input  logic [KEY_W-1:0]  stc_key,
  output logic              out_valid,
  output logic [KEY_W-1:0]  out_key,
  output logic [LINE_W-1:0] out_data,
  input  logic              out_ready,
  input  logic [KEY_W-1:0]  lk_key,
  output logic              lk_hit,
  output logic [LINE_W-1:0] lk_data,
  input  logic              squash
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [ENTRIES-1:0] valid_q, have_q, commit_q;
  logic [KEY_W-1:0]   trig_q [ENTRIES];
  logic [KEY_W-1:0]   key_q  [ENTRIES];
  logic [LINE_W-1:0]  data_q [ENTRIES];

  logic [ENTRIES-1:0] send_m, lk_m, dup_m;
  logic [IDX_W-1:0]   free_idx, out_idx, lk_idx;
  logic               have_free;

  always_comb begin
    have_free = 1'b0; free_idx = '0; out_idx = '0; lk_idx = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      send_m[i] = valid_q[i] && have_q[i] && commit_q[i];
      lk_m[i]   = valid_q[i] && have_q[i] && key_q[i] == lk_key;
      dup_m[i]  = valid_q[i] && key_q[i] == pf_key;
    end
    for (int i = ENTRIES-1; i >= 0; i--) begin
      if (!valid_q[i]) begin have_free = 1'b1; free_idx = IDX_W'(i); end
      if (send_m[i]) out_idx = IDX_W'(i);
      if (lk_m[i])   lk_idx  = IDX_W'(i);
    end
    pf_ok     = have_free && !(|dup_m);
    out_valid = |send_m;
    out_key   = key_q[out_idx];
    out_data  = data_q[out_idx];
    lk_hit    = |lk_m;
    lk_data   = data_q[lk_idx];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid_q <= '0; have_q <= '0; commit_q <= '0;
    end else begin
      logic [ENTRIES-1:0] v, h, c;
      v = valid_q; h = have_q; c = commit_q;
      if (out_valid && out_ready) v[out_idx] = 1'b0;
      for (int i = 0; i < ENTRIES; i++) begin
        if (fill_valid && valid_q[i] && !have_q[i] && key_q[i] == fill_key) begin
          h[i] = 1'b1;
          data_q[i] <= fill_data;
        end
        if (stc_valid && valid_q[i] && trig_q[i] == stc_key) c[i] = 1'b1;
      end
      if (squash) v = v & c;
      if (pf_valid && pf_ok) begin
        v[free_idx] = 1'b1; h[free_idx] = 1'b0; c[free_idx] = 1'b0;
        trig_q[free_idx] <= pf_trig_key;
        key_q[free_idx]  <= pf_key;
      end
      valid_q <= v; have_q <= h; commit_q <= c;
    end
  end

endmodule
