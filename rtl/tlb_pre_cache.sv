// tlb_pre_cache: keeps translations found by page-table walks for
// uncommitted instructions out of the TLB.
//
// A translation that missed the TLB and was produced by a page walk is put
// here (walk_*) instead of into the TLB; lookups (lk_*) search it in parallel
// with the TLB. Every committing memory instruction presents its virtual
// address (cm_*); if its page is here, the translation is written into the
// TLB (tlb_wr_*, one cycle later) and the entry is freed. A squash clears
// every translation not already on its way to the TLB (all translations
// carry the same sequence number, so a squash takes them all). The storage is a
// pre_cache instance keyed by virtual page number with the physical page
// number as payload.
//
// Timing: lk_* is combinational, tlb_wr_* is a registered one-cycle pulse
// in the cycle after the commit. Synchronous active-low reset.
//
// From the paper: behaviour and the 32-entry size. This design's choices:
// 32-bit virtual and physical addresses with 4 KB pages (20-bit page
// numbers), no permission bits, the TLB write is not back-pressured.
module tlb_pre_cache #(
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned VA_W    = 32,
  parameter int unsigned PA_W    = 32,
  parameter int unsigned PAGE_W  = 12,
  localparam int unsigned VPN_W  = VA_W - PAGE_W,
  localparam int unsigned PPN_W  = PA_W - PAGE_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [VA_W-1:0]  lk_vaddr,
  output logic             lk_hit,
  output logic [PPN_W-1:0] lk_ppn,
  input  logic             walk_valid,
  input  logic [VA_W-1:0]  walk_vaddr,
  input  logic [PPN_W-1:0] walk_ppn,
  input  logic             cm_valid,
  input  logic [VA_W-1:0]  cm_vaddr,
  output logic             tlb_wr_valid,
  output logic [VPN_W-1:0] tlb_wr_vpn,
  output logic [PPN_W-1:0] tlb_wr_ppn,
  input  logic             squash
);

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic             cm_hit, cm_coal, inv_hit, fill_ok;
  logic [IDX_W-1:0] cm_idx, idx_q;
  logic [PPN_W-1:0] cm_ppn;
  logic [1:0]       cm_level;
  logic [IDX_W:0]   occ;
  logic [IDX_W-1:0] fill_idx;
  logic [ENTRIES-1:0] clr_mask;

  pre_cache #(.ENTRIES(ENTRIES), .KEY_W(VPN_W), .DATA_W(PPN_W)) u_store (
    .clk, .rst_n,
    .lk_key(lk_vaddr[VA_W-1:PAGE_W]), .lk_hit, .lk_data(lk_ppn),
    .fill_valid(walk_valid), .fill_key(walk_vaddr[VA_W-1:PAGE_W]), .fill_data(walk_ppn),
    .fill_level(2'd0), .fill_seq('0), .fill_ok, .fill_idx,
    .cm_valid, .cm_key(cm_vaddr[VA_W-1:PAGE_W]), .cm_hit, .cm_coalesced(cm_coal),
    .cm_idx, .cm_data(cm_ppn), .cm_level,
    .done_valid(tlb_wr_valid), .done_idx(idx_q),
    .inv_valid(1'b0), .inv_key('0), .inv_hit,
    .squash, .squash_seq('0), .clr_mask, .occupancy(occ)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) tlb_wr_valid <= 1'b0;
    else begin
      tlb_wr_valid <= cm_hit;
      tlb_wr_vpn   <= cm_vaddr[VA_W-1:PAGE_W];
      tlb_wr_ppn   <= cm_ppn;
      idx_q        <= cm_idx;
    end
  end

endmodule
