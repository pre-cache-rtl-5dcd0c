// precache_top: memory side of one core protected by pre-caches.
//
// Data side. A load looks up the L1 data cache and the data pre-cache in
// parallel; a hit in either answers after L1_LAT cycles (the pre-cache is
// given the L1 latency). If both miss, the private L2 is searched (L2_LAT
// more cycles), together with the L2 prefetch buffer, and then the levels
// below over the mem_* port, with a request that must not change coherence
// state. The line returned is put in the pre-cache, tagged with the level
// that supplied it, and never into L1 or L2; the L2 pre-cache directory
// records it. When the load commits (cm_*), the pre-cache entry is locked
// and a store-to-cache (STC) runs: if the line came from below L2, an STC
// request goes down first (there the shared levels take their lock, update
// coherence and drop their directory entry, or refuse with abort); then at
// L2 the directory entry is removed, the prefetch buffer is told that the
// load committed, and L2 is written if it missed; then L1 is written and the
// pre-cache entry freed. An invalidation of the line while the STC waits for
// the lower levels aborts it and nothing is written. Every load carries a
// program-order sequence number (ld_seq); a squash names the oldest squashed
// load (squash_seq). It clears the unlocked pre-cache lines owned by that
// load or younger ones, the same entries of the L2 directory and the
// uncommitted prefetch-buffer entries, kills the in-flight load if it is
// squashed (its data is dropped), and is passed down (squash_out). A line
// is owned by the oldest load that used it: a pre-cache hit by an older
// load takes it over. An eviction in L2
// back-invalidates L1 and, through the L2 directory, the pre-cache; an
// invalidation from below (ext_inv_*) does the same. A committed store drops
// the line from the pre-cache (aborting a pending STC) and from the
// directory, updates L1 and L2 where present and is written through below.
//
// Instruction side: an L1 instruction cache with the instruction pre-cache
// beside it; fetch fills go to the instruction pre-cache while an indirect
// jump is unresolved and are released to the I-cache when it commits.
// TLB side: the TLB pre-cache, whose output writes the (external) TLB.
//
// Interfaces: ld_/cm_/st_ requests and mem_req_ are valid/ready handshakes;
// ld_resp_, mem_resp_ and the pulses are single-cycle. One data-side
// operation runs at a time, in the priority squash, commit, store, prefetch
// buffer transfer, load. Synchronous active-low reset; after reset the
// cache arrays clear one set per cycle, so requests are first accepted
// L2_SETS cycles later.
//
// From the paper: parallel lookup, fill into the pre-cache only, hit-level
// tag, STC to the missed levels via the hit level, directories at each level,
// abort on invalidation during lock acquisition, coherence update deferred to
// the STC, squash behaviour, store handling, prefetch buffer at L2, all
// sizes and latencies. This design's choices: one operation at a time, a
// write-through no-allocate data cache, L3 and memory outside the design, a
// prefetch-buffer hit tagged as coming from below L2, single-port arrays.
module precache_top
  import precache_pkg::*;
#(
  parameter int unsigned PC_ENTRIES  = 32,    // data pre-cache = load queue
  parameter int unsigned L1_SETS     = 128,   // 32 KB / 64 B / 4 ways
  parameter int unsigned L1_WAYS     = 4,
  parameter int unsigned L1_LAT      = 4,
  parameter int unsigned L2_SETS     = 4096,  // 2 MB / 64 B / 8 ways
  parameter int unsigned L2_WAYS     = 8,
  parameter int unsigned L2_LAT      = 10,
  parameter int unsigned PB_ENTRIES  = 16,
  parameter int unsigned IPC_BLOCKS  = 28,
  parameter int unsigned IPC_QDEPTH  = 448,
  parameter int unsigned TPC_ENTRIES = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // loads from the core
  input  logic        ld_valid,
  output logic        ld_ready,
  input  addr_t       ld_addr,
  input  seq_t        ld_seq,        // program-order number of the load
  output logic        ld_resp_valid,
  output word_t       ld_resp_data,
  output src_e        ld_resp_src,
  // load commits
  input  logic        cm_valid,
  output logic        cm_ready,
  input  addr_t       cm_addr,
  // committed stores
  input  logic        st_valid,
  output logic        st_ready,
  input  addr_t       st_addr,
  input  word_t       st_data,
  // pipeline squash
  input  logic        squash,
  input  seq_t        squash_seq,    // oldest squashed load: it and younger ones go
  // port to the shared levels below L2 (L3 and memory)
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mreq_e       mem_req_type,
  output addr_t       mem_req_addr,
  output word_t       mem_req_data,
  input  logic        mem_resp_valid,
  input  line_t       mem_resp_data,
  input  level_e      mem_resp_level,
  input  logic        mem_resp_abort,
  input  logic        ext_inv_valid,
  output logic        ext_inv_ready,
  input  addr_t       ext_inv_addr,
  output logic        squash_out,
  // hardware prefetcher requests and their data
  input  logic        pf_valid,
  input  addr_t       pf_trig_addr,
  input  addr_t       pf_addr,
  output logic        pf_ok,
  output logic        pf_mem_req_valid,
  output addr_t       pf_mem_req_addr,
  input  logic        pf_mem_resp_valid,
  input  addr_t       pf_mem_resp_addr,
  input  line_t       pf_mem_resp_data,
  // instruction fetch
  input  addr_t       if_addr,
  output logic        if_hit,
  output line_t       if_data,
  output logic        if_from_ipc,
  input  logic        if_fill_valid,
  output logic        if_fill_ready,
  input  addr_t       if_fill_addr,
  input  line_t       if_fill_data,
  input  logic        ijump_dec,
  input  logic        ijump_commit,
  input  logic        mispredict,
  output logic        ipc_spec_mode,
  // TLB pre-cache
  input  addr_t       tlb_lk_vaddr,
  output logic        tpc_hit,
  output logic [19:0] tpc_ppn,
  input  logic        walk_valid,
  input  addr_t       walk_vaddr,
  input  logic [19:0] walk_ppn,
  input  logic        tcm_valid,
  input  addr_t       tcm_vaddr,
  output logic        tlb_wr_valid,
  output logic [19:0] tlb_wr_vpn,
  output logic [19:0] tlb_wr_ppn,
  // event pulses
  output mem_events_t events
);

  localparam int unsigned PCI_W = $clog2(PC_ENTRIES);
  localparam int unsigned CNT_W = $clog2(L1_LAT + L2_LAT + 1) + 1;

  typedef enum logic [3:0] {
    S_IDLE, S_LD_L1, S_LD_L2, S_LD_MREQ, S_LD_MWAIT,
    S_STC_MREQ, S_STC_MWAIT, S_STC_L2, S_STC_L1,
    S_ST, S_ST_MREQ, S_ST_MWAIT
  } state_e;

  state_e           state_q;
  logic [CNT_W-1:0] cnt_q;
  addr_t            addr_q;
  word_t            sdata_q;
  logic             killed_q;
  seq_t             seq_q;
  logic             squash_ld;
  // STC in flight
  key_t             stc_key_q;
  line_t            stc_data_q;
  level_e           stc_level_q;
  logic [PCI_W-1:0] stc_idx_q;
  logic             stc_abort_q;
  logic             stc_active;

  // ---------------- arrays ----------------
  logic  pc_lk_hit, pc_fill_valid, pc_fill_ok, pc_cm_valid, pc_cm_hit, pc_cm_coal;
  line_t pc_lk_data, pc_cm_data, pc_fill_data;
  level_e pc_fill_level;
  logic [1:0] pc_cm_level;
  logic [PCI_W-1:0] pc_cm_idx;
  logic  pc_done_valid, pc_inv_valid, pc_inv_hit;
  key_t  pc_inv_key;
  logic [PCI_W:0] pc_occ;
  logic [PCI_W-1:0] pc_fill_idx;
  logic [PC_ENTRIES-1:0] pc_clr_mask;
  logic  pc_refresh;

  pre_cache #(.ENTRIES(PC_ENTRIES)) u_pc (
    .clk, .rst_n,
    .lk_key(key_of(addr_q)), .lk_hit(pc_lk_hit), .lk_data(pc_lk_data),
    .fill_valid(pc_fill_valid), .fill_key(key_of(addr_q)), .fill_data(pc_fill_data),
    .fill_level(pc_fill_level), .fill_seq(seq_q), .fill_ok(pc_fill_ok), .fill_idx(pc_fill_idx),
    .cm_valid(pc_cm_valid), .cm_key(key_of(cm_addr)), .cm_hit(pc_cm_hit),
    .cm_coalesced(pc_cm_coal), .cm_idx(pc_cm_idx), .cm_data(pc_cm_data), .cm_level(pc_cm_level),
    .done_valid(pc_done_valid), .done_idx(stc_idx_q),
    .inv_valid(pc_inv_valid), .inv_key(pc_inv_key), .inv_hit(pc_inv_hit),
    .squash, .squash_seq, .clr_mask(pc_clr_mask), .occupancy(pc_occ)
  );

  // the cache arrays clear themselves one set per cycle after reset
  logic  l1d_ready, l2_ready, l1i_ready, arrays_ready;
  assign arrays_ready = l1d_ready && l2_ready && l1i_ready;

  logic  l1_hit, l1_touch, l1_wr, l1_ev, l1_st, l1_inv, l1_inv_hit;
  line_t l1_data;
  key_t  l1_ev_key, l1_inv_key;

  sa_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS)) u_l1d (
    .clk, .rst_n, .ready(l1d_ready),
    .rd_key(key_of(addr_q)), .rd_hit(l1_hit), .rd_data(l1_data),
    .touch_valid(l1_touch), .touch_key(key_of(addr_q)),
    .wr_valid(l1_wr), .wr_key(stc_key_q), .wr_data(stc_data_q),
    .ev_valid(l1_ev), .ev_key(l1_ev_key),
    .st_valid(l1_st), .st_key(key_of(addr_q)), .st_widx(addr_q[OFF_W-1:3]), .st_word(sdata_q),
    .inv_valid(l1_inv), .inv_key(l1_inv_key), .inv_hit(l1_inv_hit)
  );

  logic  l2_hit, l2_touch, l2_wr, l2_ev, l2_st, l2_inv, l2_inv_hit;
  line_t l2_data, l2_wr_data;
  key_t  l2_ev_key, l2_wr_key;

  sa_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS)) u_l2 (
    .clk, .rst_n, .ready(l2_ready),
    .rd_key(key_of(addr_q)), .rd_hit(l2_hit), .rd_data(l2_data),
    .touch_valid(l2_touch), .touch_key(key_of(addr_q)),
    .wr_valid(l2_wr), .wr_key(l2_wr_key), .wr_data(l2_wr_data),
    .ev_valid(l2_ev), .ev_key(l2_ev_key),
    .st_valid(l2_st), .st_key(key_of(addr_q)), .st_widx(addr_q[OFF_W-1:3]), .st_word(sdata_q),
    .inv_valid(l2_inv), .inv_key(key_of(ext_inv_addr)), .inv_hit(l2_inv_hit)
  );

  logic dir_ins, dir_rm, dir_probe, dir_hit;
  key_t dir_rm_key, dir_probe_key;

  precache_dir #(.ENTRIES(PC_ENTRIES)) u_l2dir (
    .clk, .rst_n,
    .ins_valid(dir_ins), .ins_idx(pc_fill_idx), .ins_key(key_of(addr_q)),
    .rm_valid(dir_rm), .rm_key(dir_rm_key),
    .probe_valid(dir_probe), .probe_key(dir_probe_key), .probe_hit(dir_hit),
    .clear_mask(pc_clr_mask)
  );

  logic  pb_stc, pb_out_valid, pb_out_ready, pb_lk_hit;
  key_t  pb_out_key;
  line_t pb_out_data, pb_lk_data;

  prefetch_buffer #(.ENTRIES(PB_ENTRIES)) u_pb (
    .clk, .rst_n,
    .pf_valid, .pf_trig_key(key_of(pf_trig_addr)), .pf_key(key_of(pf_addr)), .pf_ok,
    .fill_valid(pf_mem_resp_valid), .fill_key(key_of(pf_mem_resp_addr)), .fill_data(pf_mem_resp_data),
    .stc_valid(pb_stc), .stc_key(stc_key_q),
    .out_valid(pb_out_valid), .out_key(pb_out_key), .out_data(pb_out_data), .out_ready(pb_out_ready),
    .lk_key(key_of(addr_q)), .lk_hit(pb_lk_hit), .lk_data(pb_lk_data),
    .squash
  );

  assign pf_mem_req_valid = pf_valid && pf_ok;
  assign pf_mem_req_addr  = pf_addr;

  // ---------------- data-side control ----------------
  logic ld_fire, cm_fire, inv_fire, live;

  assign stc_active = state_q inside {S_STC_MREQ, S_STC_MWAIT, S_STC_L2, S_STC_L1};
  // Invalidations are held off while a cache array is being written.
  assign ext_inv_ready = arrays_ready && !(state_q inside {S_STC_L2, S_STC_L1, S_ST}) && !pb_out_ready;
  assign inv_fire      = ext_inv_valid && ext_inv_ready;

  assign cm_ready = state_q == S_IDLE && !squash && arrays_ready;
  assign cm_fire  = cm_valid && cm_ready;
  logic st_start;
  assign st_start = cm_ready && !cm_valid && st_valid;
  assign pb_out_ready = cm_ready && !cm_valid && !st_valid && pb_out_valid;
  assign ld_ready = cm_ready && !cm_valid && !st_valid && !pb_out_valid;
  assign ld_fire  = ld_valid && ld_ready;
  assign pc_cm_valid = cm_fire;

  // a load squashed now or earlier neither answers nor fills
  assign squash_ld = squash && seq_at_or_after(seq_q, squash_seq) &&
                     state_q inside {S_LD_L1, S_LD_L2, S_LD_MREQ, S_LD_MWAIT};
  assign live = !killed_q && !squash_ld;

  logic lat_l1_done, lat_l2_done;
  assign lat_l1_done = state_q == S_LD_L1 && cnt_q == CNT_W'(L1_LAT);
  assign lat_l2_done = state_q == S_LD_L2 && cnt_q == CNT_W'(L2_LAT);

  mem_events_t ev_a;
  line_t resp_line;
  always_comb begin
    ld_resp_valid = 1'b0;
    ld_resp_src   = SRC_L1;
    resp_line     = l1_data;
    pc_fill_valid = 1'b0;
    pc_fill_data  = l2_data;
    pc_fill_level = LVL_L2;
    dir_ins       = 1'b0;
    pc_refresh    = 1'b0;
    l1_touch      = 1'b0;
    l2_touch      = 1'b0;
    ev_a        = '0;
    if (lat_l1_done && live) begin
      if (l1_hit) begin
        ld_resp_valid = 1'b1; ld_resp_src = SRC_L1; resp_line = l1_data;
        l1_touch = 1'b1; ev_a.l1_hit = 1'b1;
      end else if (pc_lk_hit) begin
        ld_resp_valid = 1'b1; ld_resp_src = SRC_PRECACHE; resp_line = pc_lk_data;
        ev_a.pc_hit = 1'b1;
        // the line now also belongs to this load, if it is older
        pc_fill_valid = 1'b1; pc_fill_data = pc_lk_data; pc_refresh = 1'b1;
      end
    end
    if (lat_l2_done && live) begin
      if (l2_hit) begin
        ld_resp_valid = 1'b1; ld_resp_src = SRC_BELOW; resp_line = l2_data;
        pc_fill_valid = 1'b1; pc_fill_data = l2_data; pc_fill_level = LVL_L2;
        l2_touch = 1'b1; ev_a.l2_hit = 1'b1;
      end else if (pb_lk_hit) begin
        ld_resp_valid = 1'b1; ld_resp_src = SRC_BELOW; resp_line = pb_lk_data;
        pc_fill_valid = 1'b1; pc_fill_data = pb_lk_data; pc_fill_level = LVL_L3;
        ev_a.pb_hit = 1'b1;
      end
    end
    if (state_q == S_LD_MWAIT && mem_resp_valid && live) begin
      ld_resp_valid = 1'b1; ld_resp_src = SRC_BELOW; resp_line = mem_resp_data;
      pc_fill_valid = 1'b1; pc_fill_data = mem_resp_data; pc_fill_level = mem_resp_level;
    end
    dir_ins = pc_fill_valid && pc_fill_ok && !pc_refresh;
    ev_a.pc_full = pc_fill_valid && !pc_fill_ok;
    ld_resp_data = word_of(resp_line, addr_q[OFF_W-1:3]);
    // STC ev_a
    ev_a.stc_start     = pc_cm_hit;
    ev_a.squash_kill   = squash_ld && !killed_q;
    ev_a.squash_clear  = |pc_clr_mask;
    ev_a.store         = state_q == S_ST_MWAIT && mem_resp_valid;
  end

  // Lower-level requests
  always_comb begin
    mem_req_valid = state_q inside {S_LD_MREQ, S_STC_MREQ, S_ST_MREQ};
    mem_req_type  = state_q == S_STC_MREQ ? MREQ_STC :
                    state_q == S_ST_MREQ  ? MREQ_STORE : MREQ_LOAD;
    mem_req_addr  = state_q == S_STC_MREQ ? {stc_key_q, OFF_W'(0)} : addr_q;
    mem_req_data  = sdata_q;
  end
  assign squash_out = squash;

  // Cache, directory and pre-cache side operations
  logic stc_inv_hit;   // an invalidation or store hits the line of the STC
  always_comb begin
    l1_wr = 1'b0; l2_wr = 1'b0; l1_st = 1'b0; l2_st = 1'b0;
    l1_inv = 1'b0; l1_inv_key = key_of(ext_inv_addr);
    l2_inv = 1'b0;
    l2_wr_key = stc_key_q; l2_wr_data = stc_data_q;
    dir_rm = 1'b0; dir_rm_key = stc_key_q;
    dir_probe = 1'b0; dir_probe_key = key_of(ext_inv_addr);
    pc_inv_valid = 1'b0; pc_inv_key = dir_probe_key;
    pc_done_valid = 1'b0;
    pb_stc = 1'b0;
    stc_inv_hit = 1'b0;
    // invalidation from below: L2, L1, and the pre-cache through the directory
    if (inv_fire) begin
      l2_inv = 1'b1; l1_inv = 1'b1; dir_probe = 1'b1;
      stc_inv_hit = stc_active && key_of(ext_inv_addr) == stc_key_q;
    end
    // prefetched line of a committed load moves into L2
    if (pb_out_ready) begin
      l2_wr = 1'b1; l2_wr_key = pb_out_key; l2_wr_data = pb_out_data;
    end
    case (state_q)
      S_STC_L2: begin
        dir_rm = stc_level_q != LVL_L1;
        pb_stc = 1'b1;
        if (!stc_abort_q && stc_level_q inside {LVL_L3, LVL_MEM}) l2_wr = 1'b1;
      end
      S_STC_L1: begin
        l1_wr = !stc_abort_q;
        pc_done_valid = 1'b1;
      end
      S_ST: begin
        l1_st = 1'b1; l2_st = 1'b1;
        dir_rm = 1'b1; dir_rm_key = key_of(addr_q);
        pc_inv_valid = 1'b1; pc_inv_key = key_of(addr_q);
      end
      default: ;
    endcase
    // a line displaced from L2 leaves L1 and, via the directory, the pre-cache
    if (l2_wr && l2_ev) begin
      l1_inv = 1'b1; l1_inv_key = l2_ev_key;
      dir_probe = 1'b1; dir_probe_key = l2_ev_key;
    end
    if (dir_probe && dir_hit) begin
      pc_inv_valid = 1'b1; pc_inv_key = dir_probe_key;
    end
  end

  always_comb begin
    events           = ev_a;
    events.dir_inv   = dir_probe && dir_hit;
    events.l2_evict  = l2_wr && l2_ev;
    events.pb_to_l2  = pb_out_ready;
    events.stc_done  = state_q == S_STC_L1 && !stc_abort_q;
    events.stc_abort = state_q == S_STC_L1 && stc_abort_q;
    events.mem_load  = state_q == S_LD_MREQ && mem_req_ready;
  end

  assign st_ready = state_q == S_ST_MWAIT && mem_resp_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      cnt_q       <= '0;
      killed_q    <= 1'b0;
      stc_abort_q <= 1'b0;
    end else begin
      if (squash_ld) killed_q <= 1'b1;
      if (stc_inv_hit) stc_abort_q <= 1'b1;
      unique case (state_q)
        S_IDLE: begin
          killed_q    <= 1'b0;
          stc_abort_q <= 1'b0;
          if (cm_fire) begin
            if (pc_cm_hit) begin
              stc_key_q   <= key_of(cm_addr);
              stc_data_q  <= pc_cm_data;
              stc_level_q <= level_e'(pc_cm_level);
              stc_idx_q   <= pc_cm_idx;
              state_q     <= level_e'(pc_cm_level) inside {LVL_L3, LVL_MEM} ? S_STC_MREQ : S_STC_L2;
            end
          end else if (st_start) begin
            addr_q  <= st_addr;
            sdata_q <= st_data;
            state_q <= S_ST;
          end else if (ld_fire) begin
            addr_q  <= ld_addr;
            seq_q   <= ld_seq;
            cnt_q   <= CNT_W'(1);
            state_q <= S_LD_L1;
          end
        end
        S_LD_L1: begin
          cnt_q <= cnt_q + 1'b1;
          if (squash_ld) state_q <= S_IDLE;
          else if (lat_l1_done) begin
            if (l1_hit || pc_lk_hit || killed_q) state_q <= S_IDLE;
            else begin state_q <= S_LD_L2; cnt_q <= CNT_W'(1); end
          end
        end
        S_LD_L2: begin
          cnt_q <= cnt_q + 1'b1;
          if (squash_ld) state_q <= S_IDLE;
          else if (lat_l2_done)
            state_q <= (l2_hit || pb_lk_hit || killed_q) ? S_IDLE : S_LD_MREQ;
        end
        S_LD_MREQ:  if (mem_req_ready) state_q <= S_LD_MWAIT;
        S_LD_MWAIT: if (mem_resp_valid) state_q <= S_IDLE;
        S_STC_MREQ: if (mem_req_ready) state_q <= S_STC_MWAIT;
        S_STC_MWAIT: if (mem_resp_valid) begin
          if (mem_resp_abort) stc_abort_q <= 1'b1;
          state_q <= S_STC_L2;
        end
        S_STC_L2: state_q <= S_STC_L1;
        S_STC_L1: state_q <= S_IDLE;
        S_ST: state_q <= S_ST_MREQ;
        S_ST_MREQ:  if (mem_req_ready) state_q <= S_ST_MWAIT;
        S_ST_MWAIT: if (mem_resp_valid) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- instruction side ----------------
  logic  l1i_hit, l1i_wr, l1i_ev, l1i_inv_hit;
  line_t l1i_data, l1i_wr_data, ipc_f_data, ic_data;
  key_t  l1i_wr_key, l1i_ev_key, ic_key;
  logic  ipc_f_hit, ipc_fill_ready, ic_valid;
  logic [$clog2(IPC_BLOCKS+1)-1:0] ipc_occ;

  sa_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS)) u_l1i (
    .clk, .rst_n, .ready(l1i_ready),
    .rd_key(key_of(if_addr)), .rd_hit(l1i_hit), .rd_data(l1i_data),
    .touch_valid(1'b0), .touch_key(key_of(if_addr)),
    .wr_valid(l1i_wr), .wr_key(l1i_wr_key), .wr_data(l1i_wr_data),
    .ev_valid(l1i_ev), .ev_key(l1i_ev_key),
    .st_valid(1'b0), .st_key('0), .st_widx('0), .st_word('0),
    .inv_valid(1'b0), .inv_key('0), .inv_hit(l1i_inv_hit)
  );

  ipre_cache #(.BLOCKS(IPC_BLOCKS), .QDEPTH(IPC_QDEPTH)) u_ipc (
    .clk, .rst_n,
    .f_key(key_of(if_addr)), .f_hit(ipc_f_hit), .f_data(ipc_f_data),
    .spec_mode(ipc_spec_mode),
    .fill_valid(if_fill_valid && ipc_spec_mode), .fill_key(key_of(if_fill_addr)),
    .fill_data(if_fill_data), .fill_ready(ipc_fill_ready),
    .ijump_dec, .ijump_commit, .mispredict,
    .ic_valid, .ic_key, .ic_data, .ic_ready(l1i_ready),
    .occupancy(ipc_occ)
  );

  assign if_hit        = l1i_hit || ipc_f_hit;
  assign if_from_ipc   = !l1i_hit && ipc_f_hit;
  assign if_data       = l1i_hit ? l1i_data : ipc_f_data;
  // released blocks have priority over non-speculative fills
  assign if_fill_ready = ipc_spec_mode ? ipc_fill_ready : (l1i_ready && !ic_valid);
  assign l1i_wr        = ic_valid || (if_fill_valid && !ipc_spec_mode);
  assign l1i_wr_key    = ic_valid ? ic_key  : key_of(if_fill_addr);
  assign l1i_wr_data   = ic_valid ? ic_data : if_fill_data;

  // ---------------- TLB side ----------------
  tlb_pre_cache #(.ENTRIES(TPC_ENTRIES)) u_tpc (
    .clk, .rst_n,
    .lk_vaddr(tlb_lk_vaddr), .lk_hit(tpc_hit), .lk_ppn(tpc_ppn),
    .walk_valid, .walk_vaddr, .walk_ppn,
    .cm_valid(tcm_valid), .cm_vaddr(tcm_vaddr),
    .tlb_wr_valid, .tlb_wr_vpn, .tlb_wr_ppn,
    .squash
  );

  // The pre-cache only ever holds lines that came from L2 or below, so the
  // L2 directory must have room whenever the pre-cache has.
  // a line is recorded in the directory only when the pre-cache took it
  assert property (@(posedge clk) disable iff (!rst_n) dir_ins |-> pc_fill_ok);

endmodule
